// sp_reg_array: survival path register array.
//
// Holds the decoded bits u_1..u_N of each of the L survival paths. After a
// sorting step, survivor p becomes a copy of its parent path parent[p] with
// the 2^K bits of block blk set to its chosen extension alpha[p]; all L paths
// are rewritten in the same clock edge (a full L:1 copy network), which is
// why the paths are kept in registers. Bit i of u[p] is u_{i+1}.
module sp_reg_array #(
  parameter int N = 1024,
  parameter int K = 3,
  parameter int L = 4,
  localparam int NB = 2**K,
  localparam int LW = (L > 1) ? $clog2(L) : 1,
  localparam int BW = $clog2(N / NB)
) (
  input  logic          clk,
  input  logic          upd,
  input  logic [LW-1:0] parent [L],
  input  logic [NB-1:0] alpha  [L],
  input  logic [BW-1:0] blk,
  output logic [N-1:0]  u      [L]
);
  always_ff @(posedge clk) begin
    if (upd) begin
      for (int p = 0; p < L; p++) begin
        logic [N-1:0] t;
        t = u[parent[p]];
        t[blk*NB +: NB] = alpha[p];
        u[p] <= t;
      end
    end
  end
endmodule
