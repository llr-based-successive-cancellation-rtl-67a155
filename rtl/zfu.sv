// zfu: zero-forcing unit.
//
// A candidate extension alpha of a path is allowed only if it puts 0 on every
// frozen position of the current 2^K-bit block and its parent path is itself
// a live path. For the others the metric is forced to "minus infinity": the
// valid flag is cleared and, through a multiplexer, the metric word is set to
// the most negative sign-magnitude value. The sorter ranks on the valid flag
// first, so a dropped candidate can never survive, even against a live path
// whose metric has saturated to the same word. Purely combinational.
module zfu
  import polar_pkg::*;
#(
  parameter int K = 3
) (
  input  metric_t            pm_in  [2**(2**K)],
  input  logic [2**K-1:0]    frozen,        // bit j-1: u of position j is frozen
  input  logic               parent_valid,
  output metric_t            pm_out [2**(2**K)],
  output logic [2**(2**K)-1:0] valid
);
  localparam int NB = 2**K;
  localparam int NC = 2**NB;
  localparam metric_t NEG_INF = {1'b1, {(M-1){1'b1}}};

  for (genvar a = 0; a < NC; a++) begin : g_c
    localparam logic [NB-1:0] ALPHA = NB'(a);
    assign valid[a]  = parent_valid && ((ALPHA & frozen) == '0);
    assign pm_out[a] = valid[a] ? pm_in[a] : NEG_INF;
  end
endmodule
