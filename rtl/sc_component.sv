// sc_component: one LLR-based SC component decoder of the list decoder.
//
// It keeps the first m-K stages of an ordinary SC decoder, carried out by a
// P-wide PE array that is time-shared over the tree, and replaces the last K
// stages by the metric computation unit (MCU) and zero-forcing unit (ZFU):
// the 2^K LLRs of a leaf block go into the MCU together with the path's
// metric, and the ZFU marks the candidates that break a frozen bit. There are
// L of these, one per list path. The LLR memory bank of the path and the
// control are outside. Combinational; the caller registers the outputs.
module sc_component
  import polar_pkg::*;
#(
  parameter int K = 3,
  parameter int P = 64
) (
  // PE array (tree stages)
  input  llr_t               pe_a      [P],
  input  llr_t               pe_b      [P],
  input  logic [P-1:0]       pe_usum,
  input  logic               pe_ctrl,
  output llr_t               pe_c      [P],
  // leaf block: MCU + ZFU
  input  llr_t               leaf_llr  [2**K],
  input  metric_t            pm_in,
  input  logic               path_valid,
  input  logic [2**K-1:0]    frozen,
  output metric_t            cand_pm   [2**(2**K)],
  output logic [2**(2**K)-1:0] cand_valid
);
  metric_t mcu_pm [2**(2**K)];

  pe_array #(.P(P)) u_pes (
    .a(pe_a), .b(pe_b), .u_sum(pe_usum), .ctrl(pe_ctrl), .c(pe_c));

  mcu #(.K(K)) u_mcu (.s(leaf_llr), .pm_in(pm_in), .pm_out(mcu_pm));

  zfu #(.K(K)) u_zfu (
    .pm_in(mcu_pm), .frozen(frozen), .parent_valid(path_valid),
    .pm_out(cand_pm), .valid(cand_valid));
endmodule
