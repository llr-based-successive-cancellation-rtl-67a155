// mcu: LLR-based metric computation unit for a 2^K-bit decision.
//
// Given the 2^K LLRs s_j that the last retained SC stage produces for one
// path and that path's metric M(z), it computes the metric of all 2^(2^K)
// extensions alpha of the path at once:
//   M(alpha) = M(z) + sum_j ( s_j (1 - out_j) - delta(s_j) ),
//   out = alpha * U,  U = F^{(x)K},  delta(s) = s if s >= 0 else 0.
// Each LLR gives two terms, t0_j = s_j - delta(s_j) (out_j = 0) and
// t1_j = -delta(s_j) (out_j = 1); delta is a multiplexer on the sign bit.
// The terms are summed in a shared tree: level g forms, for every group of
// 2^g consecutive j, the sums for all 2^(2^g) choices of out over the group,
// from two groups of the level below, so that the 2^(2^K) final sums share
// their partial sums as in the paper's MCU diagram. The metric enters through
// a StoC converter and each final sum leaves through a saturating CtoS
// converter. Adding M(z) after the tree rather than at its root is this
// design's choice; it gives the same value. Purely combinational.
module mcu
  import polar_pkg::*;
#(
  parameter int K = 3
) (
  input  llr_t    s      [2**K],
  input  metric_t pm_in,
  output metric_t pm_out [2**(2**K)]   // index = alpha, bit j-1 = alpha_j
);
  localparam int NB = 2**K;
  localparam int NC = 2**NB;
  localparam int SW = 16;

  logic signed [SW-1:0] t0 [NB];
  logic signed [SW-1:0] t1 [NB];

  always_comb begin
    for (int j = 0; j < NB; j++) begin
      logic signed [SW-1:0] sj, dj;
      sj = SW'(llr_stoc(s[j]));
      dj = s[j][Q-1] ? '0 : sj;       // delta(s_j): multiplexer on the sign
      t0[j] = sj - dj;
      t1[j] = -dj;
    end
  end

  for (genvar g = 0; g <= K; g++) begin : lv
    localparam int GS  = 2**g;          // LLRs per group
    localparam int NG  = NB / GS;       // groups on this level
    localparam int NCB = 2**GS;         // out-patterns per group
    logic signed [SW-1:0] ps [NG][NCB];
    if (g == 0) begin : g_leaf
      for (genvar j = 0; j < NB; j++) begin : g_j
        assign ps[j][0] = t0[j];
        assign ps[j][1] = t1[j];
      end
    end else begin : g_node
      localparam int HC = 2**(GS/2);    // patterns of a half group
      for (genvar gr = 0; gr < NG; gr++) begin : g_gr
        for (genvar cb = 0; cb < NCB; cb++) begin : g_cb
          assign ps[gr][cb] = lv[g-1].ps[2*gr][cb % HC] + lv[g-1].ps[2*gr+1][cb / HC];
        end
      end
    end
  end

  logic signed [SW-1:0] pm_tc;
  assign pm_tc = pm_stoc(pm_in);

  for (genvar a = 0; a < NC; a++) begin : g_out
    localparam int unsigned OUT = kernel_encode(a, NB);
    assign pm_out[a] = pm_ctos(pm_tc + lv[K].ps[0][OUT]);
  end
endmodule
