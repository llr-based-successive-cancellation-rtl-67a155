// polar_pkg: word formats and small arithmetic helpers shared by the
// LLR-based multi-bit SCL decoder.
//
// LLR messages are Q-bit sign-magnitude words (sign in the MSB, 1 = negative)
// and path metrics are M-bit sign-magnitude words. The processing element and
// the metric computation unit convert these to two's complement before adding
// ("StoC") and back afterwards with saturation ("CtoS"), as the PE and MCU
// diagrams of the architecture show. Q = 6 and M = 8 are the quantisation the
// decoder is specified with; the sorter compares only S = M-1 bits of a metric.
package polar_pkg;

  localparam int Q = 6;        // LLR width (sign-magnitude)
  localparam int M = 8;        // path metric width (sign-magnitude)
  localparam int S = M - 1;    // comparator width inside the metric sorter

  localparam int LLR_MAX = (1 << (Q - 1)) - 1;   // largest LLR magnitude
  localparam int PM_MAX  = (1 << (M - 1)) - 1;   // largest metric magnitude

  typedef logic [Q-1:0] llr_t;     // {sign, magnitude}
  typedef logic [M-1:0] metric_t;  // {sign, magnitude}

  // Decoder control states: load/wait, tree node computation, metric
  // computation, sorting, output of the decision.
  typedef enum logic [2:0] {S_IDLE, S_NODE, S_MCU, S_SORT, S_OUT} dec_state_t;

  // Sign-magnitude LLR to two's complement (Q+1 bits, so -LLR_MAX fits).
  function automatic logic signed [Q:0] llr_stoc(llr_t v);
    logic signed [Q:0] mag;
    mag = signed'({2'b00, v[Q-2:0]});
    return v[Q-1] ? -mag : mag;
  endfunction

  // Two's complement (16 bits) to sign-magnitude LLR, saturating at +-LLR_MAX.
  function automatic llr_t llr_ctos(logic signed [15:0] v);
    logic [15:0] mag;
    mag = v[15] ? 16'(-v) : 16'(v);
    if (mag > 16'(LLR_MAX)) mag = 16'(LLR_MAX);
    return {v[15], mag[Q-2:0]};
  endfunction

  // Sign-magnitude metric to two's complement (16 bits).
  function automatic logic signed [15:0] pm_stoc(metric_t v);
    logic signed [15:0] mag;
    mag = signed'({9'd0, v[M-2:0]});
    return v[M-1] ? -mag : mag;
  endfunction

  // Two's complement to sign-magnitude metric, saturating at +-PM_MAX.
  function automatic metric_t pm_ctos(logic signed [15:0] v);
    logic [15:0] mag;
    mag = v[15] ? 16'(-v) : 16'(v);
    if (mag > 16'(PM_MAX)) mag = 16'(PM_MAX);
    return {v[15] && (mag != 16'd0), mag[M-2:0]};
  endfunction

  // One bit of out = a * U, where U = F^{(x)k}, F = [1 0; 1 1] is the
  // 2^k x 2^k kernel: out_j = XOR of a_r over the rows r with (j & ~r) == 0.
  function automatic logic kernel_bit(int unsigned a, int unsigned j, int unsigned nb);
    logic r;
    r = 1'b0;
    for (int unsigned i = 0; i < nb; i++)
      if (a[i] && ((j & ~i) == 0)) r = ~r;
    return r;
  endfunction

  // Whole encoded block out = a * U for a block of nb = 2^k <= 32 bits.
  function automatic int unsigned kernel_encode(int unsigned a, int unsigned nb);
    int unsigned o;
    o = 0;
    for (int unsigned j = 0; j < nb; j++)
      if (kernel_bit(a, j, nb)) o |= (32'd1 << j);
    return o;
  endfunction

endpackage
