// pe_array: the P processing elements of one SC component decoder.
//
// All P PEs work on the same SC tree node in the same cycle: element k gets
// the k-th LLR pair (a[k], b[k]) of the current chunk and the k-th partial
// sum bit, and all share one f/g select. A node of size N' needs
// max(1, N'/P) cycles; when N' < P only the first N' outputs are meaningful.
// P = 64 is the number of PEs per path of the decoder. Combinational.
module pe_array
  import polar_pkg::*;
#(
  parameter int P = 64
) (
  input  llr_t         a    [P],
  input  llr_t         b    [P],
  input  logic [P-1:0] u_sum,
  input  logic         ctrl,     // 0: f, 1: g for the whole array
  output llr_t         c    [P]
);
  for (genvar k = 0; k < P; k++) begin : g_pe
    pe u_pe (.a(a[k]), .b(b[k]), .u_sum(u_sum[k]), .ctrl(ctrl), .c(c[k]));
  end
endmodule
