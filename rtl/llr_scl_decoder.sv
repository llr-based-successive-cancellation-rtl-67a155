// llr_scl_decoder: L-size LLR-based successive-cancellation list decoder for
// an (N, p) polar code that decides 2^K bits per list step.
//
// Datapath: L SC component decoders (P-PE array + MCU + ZFU each), one
// metric sorter, and four storage blocks: path metric registers, survival
// path registers, L LLR memory banks and the channel LLR buffer. A
// partial-sum register array and the control below complete the design.
//
// Schedule (one frame). For each leaf block i = 0 .. N/2^K-1:
//   NODE  the tree nodes from level l0 down to level m-K are computed, all L
//         paths in lock step, one P-wide chunk per cycle, a node of size N'
//         taking max(1, N'/P) cycles; l0 = 1 for i = 0, otherwise
//         l0 = m-K-ctz(i) and the first node is a g node, the rest f nodes;
//   MCU   each path's 2^K leaf LLRs and metric give 2^(2^K) candidates,
//         zero-forced by the frozen pattern of block i, and are registered;
//   SORT  the L best candidates become the new survivors: metrics, paths,
//         partial sums and memory pointers are copied from their parents.
// After the last block, OUT presents the bits of the best path on u_hat and
// pulses done. Latency from start to done is
//   sum_{l=1}^{m-K} 2^l * max(1, N/(2^l P)) + 2 * N/2^K + 2 cycles
// (546 cycles for N = 1024, K = 3, P = 64; 1058 for K = 2).
//
// Path copies without moving LLRs: each path has a pointer per tree level
// naming the bank that holds its current node of that level. A path always
// writes its own bank and sets its pointer; a survivor inherits its parent's
// pointers, so it reads the parent's data until it has recomputed a level.
// Since the lock-step schedule recomputes every level below l0 before reading
// it, a bank is never overwritten while another path still needs it.
//
// Interface: load the channel LLRs through ch_we/ch_addr/ch_data (P per
// cycle, Q-bit sign-magnitude, positive = bit 0 more likely) while idle,
// hold frozen (bit i = position i+1 frozen) for the whole frame, pulse start.
// u_hat holds the decision from done until the next done.
// Scheme, MCU, PE, ZFU, sorting width and memory kinds follow the paper;
// the schedule, pointer-based path copying, partial-sum registers, list
// initialisation with one live path and the port protocol are this design's.
module llr_scl_decoder
  import polar_pkg::*;
#(
  parameter int N = 1024,
  parameter int K = 3,
  parameter int L = 4,
  parameter int P = 64,
  localparam int NB = 2**K,
  localparam int NC = 2**NB,
  localparam int MK = $clog2(N) - K,
  localparam int LW = (L > 1) ? $clog2(L) : 1,
  localparam int BW = $clog2(N / NB),
  localparam int CW = $clog2(N / P) + 1,
  localparam int VW = $clog2(MK + 1),
  localparam int AW = (N / P > 1) ? $clog2(N / P) : 1,
  localparam int IW = $clog2(L * NC)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           ch_we,
  input  logic [AW-1:0]  ch_addr,
  input  llr_t           ch_data [P],
  input  logic [N-1:0]   frozen,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic [N-1:0]   u_hat
);
  dec_state_t state;

  logic [BW-1:0] blk;
  logic [VW-1:0] lvl;
  logic [CW-1:0] chunk;
  logic          is_g;

  function automatic int nchunks(int l);
    return ((N >> l) > P) ? (N >> l) / P : 1;
  endfunction

  // level of the first node of leaf block b (b > 0): m-K - ctz(b)
  function automatic logic [VW-1:0] start_level(logic [BW-1:0] b);
    int z;
    z = 0;
    for (int t = BW - 1; t >= 0; t--) if (b[t]) z = t;
    return VW'(MK - z);
  endfunction

  // ---------------- storage ----------------
  llr_t ch_a [P], ch_b [P];
  channel_buffer #(.N(N), .P(P)) u_chbuf (
    .clk(clk), .we(ch_we && state == S_IDLE), .wr_addr(ch_addr), .wr_data(ch_data),
    .rd_chunk(chunk), .rd_a(ch_a), .rd_b(ch_b));

  logic [LW-1:0] ptr [L][MK+1];      // bank holding path p's node at level l
  llr_t bank_a [L][P], bank_b [L][P], bank_leaf [L][NB];
  llr_t pe_c   [L][P];
  logic [VW-1:0] rd_lvl;
  assign rd_lvl = (lvl > 1) ? lvl - 1'b1 : VW'(1);

  metric_t       pm      [L];
  logic [L-1:0]  pvalid;
  logic [LW-1:0] best;
  logic [N-1:0]  u_path  [L];
  logic [P-1:0]  usum    [L];

  // sorter results, parent and extension of every survivor
  logic [IW-1:0] sel_idx [L];
  logic [L-1:0]  sel_valid;
  logic [LW-1:0] sel_parent [L];
  logic [NB-1:0] sel_alpha  [L];
  metric_t       sel_pm     [L];

  metric_t       cand_pm    [L * NC];
  logic [L*NC-1:0] cand_valid;
  metric_t       cand_pm_q  [L * NC];
  logic [L*NC-1:0] cand_valid_q;

  for (genvar p = 0; p < L; p++) begin : g_path
    llr_t pa [P], pb [P];
    metric_t cp [NC];
    logic [NC-1:0] cv;

    llr_mem #(.N(N), .K(K), .P(P)) u_mem (
      .clk(clk), .we(state == S_NODE), .wr_level(lvl), .wr_chunk(chunk),
      .wr_data(pe_c[p]), .rd_level(rd_lvl), .rd_chunk(chunk),
      .rd_a(bank_a[p]), .rd_b(bank_b[p]), .leaf(bank_leaf[p]));

    always_comb begin
      for (int k = 0; k < P; k++) begin
        pa[k] = (lvl == 1) ? ch_a[k] : bank_a[ptr[p][rd_lvl]][k];
        pb[k] = (lvl == 1) ? ch_b[k] : bank_b[ptr[p][rd_lvl]][k];
      end
    end

    sc_component #(.K(K), .P(P)) u_sc (
      .pe_a(pa), .pe_b(pb), .pe_usum(usum[p]), .pe_ctrl(is_g), .pe_c(pe_c[p]),
      .leaf_llr(bank_leaf[p]), .pm_in(pm[p]), .path_valid(pvalid[p]),
      .frozen(frozen[blk*NB +: NB]), .cand_pm(cp), .cand_valid(cv));

    for (genvar a = 0; a < NC; a++) begin : g_c
      assign cand_pm[p*NC + a]    = cp[a];
      assign cand_valid[p*NC + a] = cv[a];
    end

    assign sel_parent[p] = LW'(sel_idx[p] / IW'(NC));
    assign sel_alpha[p]  = NB'(sel_idx[p] % IW'(NC));
    assign sel_pm[p]     = cand_pm_q[sel_idx[p]];
  end

  metric_sorter #(.L(L), .K(K)) u_sort (
    .pm(cand_pm_q), .valid(cand_valid_q), .sel_idx(sel_idx), .sel_valid(sel_valid));

  pm_reg_array #(.L(L)) u_pm (
    .clk(clk), .rst_n(rst_n), .init(state == S_IDLE && start),
    .upd(state == S_SORT), .new_pm(sel_pm), .new_valid(sel_valid),
    .pm(pm), .valid(pvalid), .best(best));

  sp_reg_array #(.N(N), .K(K), .L(L)) u_sp (
    .clk(clk), .upd(state == S_SORT), .parent(sel_parent), .alpha(sel_alpha),
    .blk(blk), .u(u_path));

  psum_reg_array #(.N(N), .K(K), .L(L), .P(P)) u_ps (
    .clk(clk), .upd(state == S_SORT), .parent(sel_parent), .alpha(sel_alpha),
    .blk(blk), .rd_level(lvl), .rd_chunk(chunk), .usum(usum));

  // ---------------- control ----------------
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      blk   <= '0;
      lvl   <= VW'(1);
      chunk <= '0;
      is_g  <= 1'b0;
      done  <= 1'b0;
      u_hat <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_NODE;
          blk   <= '0;
          lvl   <= VW'(1);
          chunk <= '0;
          is_g  <= 1'b0;
        end
        S_NODE: begin
          if (int'(chunk) == nchunks(int'(lvl)) - 1) begin
            chunk <= '0;
            is_g  <= 1'b0;
            if (int'(lvl) == MK) state <= S_MCU;
            else                 lvl   <= lvl + 1'b1;
          end else begin
            chunk <= chunk + 1'b1;
          end
        end
        S_MCU: state <= S_SORT;
        S_SORT: begin
          if (int'(blk) == N / NB - 1) begin
            state <= S_OUT;
          end else begin
            blk   <= blk + 1'b1;
            lvl   <= start_level(blk + 1'b1);
            chunk <= '0;
            is_g  <= 1'b1;
            state <= S_NODE;
          end
        end
        S_OUT: begin
          u_hat <= u_path[best];
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // candidate registers (pipeline between MCU/ZFU and the sorter)
  always_ff @(posedge clk) begin
    if (state == S_MCU) begin
      cand_pm_q    <= cand_pm;
      cand_valid_q <= cand_valid;
    end
  end

  // memory pointers
  always_ff @(posedge clk) begin
    if (state == S_NODE) begin
      for (int p = 0; p < L; p++) ptr[p][lvl] <= LW'(p);
    end else if (state == S_SORT) begin
      for (int p = 0; p < L; p++)
        for (int l = 0; l <= MK; l++) ptr[p][l] <= ptr[sel_parent[p]][l];
    end
  end

  // a survivor's parent must be a live path
  for (genvar p = 0; p < L; p++) begin : g_chk
    a_parent_live: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_SORT && sel_valid[p]) |-> pvalid[sel_parent[p]]);
  end
endmodule
