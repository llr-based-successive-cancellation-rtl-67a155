// pm_reg_array: path metric register array.
//
// Holds the metric and a live flag of each of the L survival paths. All L
// entries are rewritten at once after every sorting step (upd), which is why
// they live in registers rather than memory. init starts a frame with a single
// live path of metric 0; the other L-1 entries start dead, so the first
// sorting steps cannot fill the list with copies of one path.
// best gives the live path with the largest metric (lowest index on a tie),
// which is the decoder's final choice. Metrics are M-bit sign-magnitude.
module pm_reg_array
  import polar_pkg::*;
#(
  parameter int L = 4,
  localparam int LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic          upd,
  input  metric_t       new_pm    [L],
  input  logic [L-1:0]  new_valid,
  output metric_t       pm        [L],
  output logic [L-1:0]  valid,
  output logic [LW-1:0] best
);
  localparam metric_t NEG_INF = {1'b1, {(M-1){1'b1}}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      for (int p = 0; p < L; p++) pm[p] <= NEG_INF;
    end else if (init) begin
      valid <= L'(1);
      for (int p = 0; p < L; p++) pm[p] <= (p == 0) ? '0 : NEG_INF;
    end else if (upd) begin
      valid <= new_valid;
      for (int p = 0; p < L; p++) pm[p] <= new_pm[p];
    end
  end

  always_comb begin
    logic signed [15:0] bv;
    logic               found;
    best  = '0;
    bv    = '0;
    found = 1'b0;
    for (int p = 0; p < L; p++) begin
      if (valid[p] && (!found || pm_stoc(pm[p]) > bv)) begin
        best  = LW'(p);
        bv    = pm_stoc(pm[p]);
        found = 1'b1;
      end
    end
  end
endmodule
