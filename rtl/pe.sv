// pe: LLR processing element of the successive-cancellation (SC) decoder.
//
// One PE evaluates either the f node or the g node of the SC butterfly on two
// sign-magnitude LLRs a and b:
//   f(a,b) = sign(a) sign(b) min(|a|,|b|)    (ctrl = 0)
//   g(a,b) = a (-1)^u_sum + b                (ctrl = 1)
// The f half works directly on sign and magnitude: the output sign is the XOR
// of the two signs and a magnitude comparator picks the smaller magnitude.
// The g half converts both inputs to two's complement, uses one unified
// adder/subtractor (b + a when u_sum = 0, b - a when u_sum = 1), and converts
// the result back to sign-magnitude, saturating to the Q-bit range. A final
// 2:1 multiplexer controlled by ctrl selects f or g. This is the structure of
// the paper's PE; the saturation on overflow of g is this design's choice.
// Purely combinational.
module pe
  import polar_pkg::*;
(
  input  llr_t a,
  input  llr_t b,
  input  logic u_sum,   // partial sum of the left sibling, used by g
  input  logic ctrl,    // 0: f, 1: g
  output llr_t c
);
  llr_t f_out, g_out;
  logic signed [Q+1:0] sum;

  // f unit: XOR of signs, comparator on magnitudes
  always_comb begin
    f_out[Q-1]   = a[Q-1] ^ b[Q-1];
    f_out[Q-2:0] = (a[Q-2:0] < b[Q-2:0]) ? a[Q-2:0] : b[Q-2:0];
  end

  // g unit: StoC, unified add/sub, CtoS
  always_comb begin
    if (u_sum) sum = (Q+2)'(llr_stoc(b)) - (Q+2)'(llr_stoc(a));
    else       sum = (Q+2)'(llr_stoc(b)) + (Q+2)'(llr_stoc(a));
    g_out = llr_ctos(16'(sum));
  end

  assign c = ctrl ? g_out : f_out;
endmodule
