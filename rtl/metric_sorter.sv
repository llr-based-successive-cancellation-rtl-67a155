// metric_sorter: picks the L survivors out of the L * 2^(2^K) candidates.
//
// Reduced-data-width sorting: a metric is kept and updated with M bits, but
// the comparators here are only S = M-1 bits wide. The least significant bit
// of every candidate metric is dropped before comparison, which shortens the
// critical path with negligible loss in frame error rate.
// Selection is done in L rounds. Each round is a binary max-tree over all
// candidates that are valid and not yet taken; on equal S-bit keys the lower
// candidate index wins. Round r gives survivor r. Candidate index c encodes
// the parent path (c / 2^(2^K)) and the extension alpha (c % 2^(2^K)).
// The tree structure is this design's choice: the paper only states that the
// sorter follows usual practice except for its comparator width.
// Purely combinational.
module metric_sorter
  import polar_pkg::*;
#(
  parameter int L = 4,
  parameter int K = 3,
  localparam int C  = L * 2**(2**K),
  localparam int IW = $clog2(C)
) (
  input  metric_t        pm     [C],
  input  logic [C-1:0]   valid,
  output logic [IW-1:0]  sel_idx   [L],
  output logic [L-1:0]   sel_valid
);
  localparam int CP = 2**IW;   // candidates padded to a power of two

  // S-bit sort key: sign-magnitude metric without its LSB, as two's complement
  function automatic logic signed [S:0] sort_key(metric_t v);
    logic signed [S:0] m;
    m = signed'({2'b00, v[M-2:1]});
    return v[M-1] ? -m : m;
  endfunction

  logic signed [S:0] key [CP];
  always_comb
    for (int i = 0; i < CP; i++) key[i] = (i < C) ? sort_key(pm[i]) : '0;

  always_comb begin
    logic [CP-1:0]    taken;
    logic [IW-1:0]    idx [CP];
    logic [CP-1:0]    ok;
    taken = '0;
    for (int r = 0; r < L; r++) begin
      for (int i = 0; i < CP; i++) begin
        idx[i] = IW'(i);
        ok[i]  = (i < C) && valid[i] && !taken[i];
      end
      // max tree, in place: after the pass with width w, slot i holds the
      // winner of slots 2i and 2i+1 of the previous pass
      for (int w = CP / 2; w >= 1; w = w / 2) begin
        for (int i = 0; i < w; i++) begin
          logic take_left;
          take_left = ok[2*i] && (!ok[2*i+1] || key[idx[2*i]] >= key[idx[2*i+1]]);
          idx[i] = take_left ? idx[2*i] : idx[2*i+1];
          ok[i]  = take_left ? ok[2*i]  : ok[2*i+1];
        end
      end
      sel_idx[r]   = idx[0];
      sel_valid[r] = ok[0];
      if (ok[0]) taken[idx[0]] = 1'b1;
    end
  end
endmodule
