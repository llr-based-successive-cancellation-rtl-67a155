// channel_buffer: buffer for the N channel LLRs of one frame.
//
// Loaded P LLRs per cycle (word wr_addr holds LLRs wr_addr*P .. wr_addr*P+P-1,
// Q-bit sign-magnitude). It is the level-0 node of the SC tree and is read
// only by the first tree stage, which all L paths share: chunk rd_chunk gives
// a[k] = y[c*P+k] and b[k] = y[N/2 + c*P+k]. Reads are combinational.
module channel_buffer
  import polar_pkg::*;
#(
  parameter int N = 1024,
  parameter int P = 64,
  localparam int AW = (N / P > 1) ? $clog2(N / P) : 1,
  localparam int CW = $clog2(N / P) + 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  polar_pkg::llr_t wr_data [P],
  input  logic [CW-1:0] rd_chunk,
  output polar_pkg::llr_t rd_a [P],
  output polar_pkg::llr_t rd_b [P]
);
  llr_t mem [N];

  always_ff @(posedge clk)
    if (we)
      for (int k = 0; k < P; k++) mem[int'(wr_addr) * P + k] <= wr_data[k];

  always_comb begin
    for (int k = 0; k < P; k++) begin
      int idx;
      idx = int'(rd_chunk) * P + k;
      if (idx < N / 2) begin
        rd_a[k] = mem[idx];
        rd_b[k] = mem[N / 2 + idx];
      end else begin
        rd_a[k] = '0;
        rd_b[k] = '0;
      end
    end
  end
endmodule
