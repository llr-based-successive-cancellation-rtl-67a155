// llr_mem: one bank of the LLR message memory.
//
// Each of the L SC component decoders has its own bank, so the L decoders
// never contend for a port. A bank holds the current node of every tree level
// l = 1..m-K: N/2^l LLRs at offset N - N/2^(l-1), N - 2^K words in all.
// Write port: the PE array stores P results (fewer for a node smaller than P)
// at (wr_level, wr_chunk). Read port: for the node at level rd_level it gives
// the chunk rd_chunk of its two halves, a[k] = node[c*P+k] and
// b[k] = node[N/2^(rd_level+1) + c*P+k], which are the f/g operand pairs of
// the child level; lanes past the half are 0. leaf gives the whole level m-K
// node, the 2^K LLRs the MCU needs. Reads are combinational (a register
// array); the paper calls this bulk memory and gives no port timing, so the
// single-cycle read is this design's choice.
module llr_mem
  import polar_pkg::*;
#(
  parameter int N = 1024,
  parameter int K = 3,
  parameter int P = 64,
  localparam int NB = 2**K,
  localparam int MK = $clog2(N) - K,
  localparam int CW = $clog2(N / P) + 1,
  localparam int VW = $clog2(MK + 1),
  localparam int DEPTH = N - NB
) (
  input  logic          clk,
  input  logic          we,
  input  logic [VW-1:0] wr_level,
  input  logic [CW-1:0] wr_chunk,
  input  polar_pkg::llr_t wr_data [P],
  input  logic [VW-1:0] rd_level,
  input  logic [CW-1:0] rd_chunk,
  output polar_pkg::llr_t rd_a [P],
  output polar_pkg::llr_t rd_b [P],
  output polar_pkg::llr_t leaf [NB]
);
  llr_t mem [DEPTH];

  function automatic int lvl_off(int l);
    return N - (N >> (l - 1));
  endfunction

  always_ff @(posedge clk) begin
    if (we) begin
      for (int k = 0; k < P; k++) begin
        int idx;
        idx = int'(wr_chunk) * P + k;
        if (idx < (N >> wr_level))
          mem[(lvl_off(int'(wr_level)) + idx) % DEPTH] <= wr_data[k];
      end
    end
  end

  always_comb begin
    int h, base;
    h    = N >> (rd_level + 1);
    base = lvl_off(int'(rd_level));
    for (int k = 0; k < P; k++) begin
      int idx;
      idx = int'(rd_chunk) * P + k;
      if (idx < h && rd_level >= 1) begin
        rd_a[k] = mem[(base + idx) % DEPTH];
        rd_b[k] = mem[(base + h + idx) % DEPTH];
      end else begin
        rd_a[k] = '0;
        rd_b[k] = '0;
      end
    end
    for (int j = 0; j < NB; j++) leaf[j] = mem[lvl_off(MK) + j];
  end
endmodule
