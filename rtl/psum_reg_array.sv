// psum_reg_array: partial-sum (beta) registers of the L SC component decoders.
//
// A g node needs, for each of its LLR pairs, the XOR of already decided bits
// of its left sibling (u_sum), i.e. the left sibling's re-encoded bits beta.
// For every path and every tree level l = 1..m-K this array keeps the beta of
// the most recent left child at that level (N/2^l bits at offset N - N/2^(l-1)).
// After a sorting step, survivor p takes its parent's registers and merges
// the new leaf block: beta of the leaf = alpha * U; going up the tree, a left
// child is stored, and a right child is combined with its stored left sibling
// into [beta_left XOR beta_right, beta_right] and carried one level higher.
// The read side gives, for level rd_level and chunk rd_chunk, the P bits that
// the PE array's g operation needs. The paper does not describe how partial
// sums are kept; this register organisation is this design's choice.
module psum_reg_array
  import polar_pkg::*;
#(
  parameter int N = 1024,
  parameter int K = 3,
  parameter int L = 4,
  parameter int P = 64,
  localparam int NB = 2**K,
  localparam int MK = $clog2(N) - K,
  localparam int LW = (L > 1) ? $clog2(L) : 1,
  localparam int BW = $clog2(N / NB),
  localparam int CW = $clog2(N / P) + 1,
  localparam int VW = $clog2(MK + 1)
) (
  input  logic          clk,
  input  logic          upd,
  input  logic [LW-1:0] parent [L],
  input  logic [NB-1:0] alpha  [L],
  input  logic [BW-1:0] blk,
  input  logic [VW-1:0] rd_level,   // level of the g node being computed
  input  logic [CW-1:0] rd_chunk,
  output logic [P-1:0]  usum   [L]
);
  logic [N-1:0] beta [L];

  function automatic int lvl_off(int l);
    return N - (N >> (l - 1));
  endfunction

  function automatic logic [N-1:0] merge(logic [N-1:0] old, logic [NB-1:0] a,
                                         logic [BW-1:0] b);
    logic [N-1:0] r, cur, nxt;
    logic         fin;
    r    = old;
    cur  = '0;
    for (int j = 0; j < NB; j++) cur[j] = kernel_bit(32'(a), j, NB);
    fin  = 1'b0;
    for (int l = MK; l >= 1; l--) begin
      int nl;
      nl = N >> l;
      if (!fin) begin
        if (!b[MK-l]) begin
          for (int t = 0; t < nl; t++) r[lvl_off(l) + t] = cur[t];
          fin = 1'b1;
        end else begin
          nxt = '0;
          for (int t = 0; t < nl; t++) begin
            nxt[t]      = r[lvl_off(l) + t] ^ cur[t];
            nxt[nl + t] = cur[t];
          end
          cur = nxt;
        end
      end
    end
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (upd)
      for (int p = 0; p < L; p++) beta[p] <= merge(beta[parent[p]], alpha[p], blk);
  end

  always_comb begin
    int nl, base;
    nl   = N >> rd_level;
    base = lvl_off(int'(rd_level)) + int'(rd_chunk) * P;
    for (int p = 0; p < L; p++)
      for (int k = 0; k < P; k++)
        usum[p][k] = (int'(rd_chunk) * P + k < nl) ? beta[p][(base + k) % N] : 1'b0;
  end
endmodule
