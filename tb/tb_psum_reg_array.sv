// tb_psum_reg_array: partial sums for N = 64, K = 2, L = 2, P = 8.
// A software list of decided bits is extended block by block with random
// parents and extensions. After each step the next block's first g node
// (level m-K-ctz(i+1)) is read chunk by chunk from every path, and each bit
// must equal the polar re-encoding of that path's bits under the node's
// left sibling, computed here directly from the bits.
module tb_psum_reg_array;
  import scl_ref_pkg::*;
  localparam int N = 64, K = 2, L = 2, P = 8, NB = 4, MK = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic upd = 0;
  logic parent [L];
  logic [NB-1:0] alpha [L];
  logic [3:0] blk;
  logic [2:0] rl;
  logic [4:0] rc;
  logic [P-1:0] usum [L];
  int checks = 0, failures = 0;

  psum_reg_array #(.N(N), .K(K), .L(L), .P(P)) dut (.clk(clk), .upd(upd), .parent(parent),
    .alpha(alpha), .blk(blk), .rd_level(rl), .rd_chunk(rc), .usum(usum));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit u [L][N];
    bit nu [L][N];
    rl = 3'd1; rc = '0;
    for (int t = 0; t < 20; t++) begin
      for (int b = 0; b < N / NB - 1; b++) begin
        int nxt, z, l0, node, nl, nch;
        @(negedge clk);
        blk = 4'(b);
        for (int p = 0; p < L; p++) begin
          parent[p] = (b == 0) ? 1'b0 : 1'($urandom);
          alpha[p]  = NB'($urandom);
        end
        for (int p = 0; p < L; p++) begin
          for (int i = 0; i < N; i++) nu[p][i] = u[parent[p]][i];
          for (int j = 0; j < NB; j++) nu[p][b*NB + j] = alpha[p][j];
        end
        upd = 1;
        @(negedge clk);
        upd = 0;
        u = nu;
        nxt = b + 1;
        z = 0;
        while (((nxt >> z) & 1) == 0) z++;
        l0 = MK - z;
        node = nxt >> (MK - l0);
        nl = N >> l0;
        nch = (nl > P) ? nl / P : 1;
        for (int c = 0; c < nch; c++) begin
          rl = 3'(l0); rc = 5'(c);
          #1;
          for (int p = 0; p < L; p++) begin
            bit beta [];
            beta = new[nl];
            for (int i = 0; i < nl; i++) beta[i] = u[p][(node - 1) * nl + i];
            polar_encode(beta, nl);
            for (int k = 0; k < P; k++) begin
              bit e;
              e = (c * P + k < nl) ? beta[c*P + k] : 1'b0;
              checks++;
              if (usum[p][k] != e) begin
                failures++;
                if (failures < 10) $display("FAIL t=%0d block %0d path %0d lane %0d", t, b, p, k);
              end
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
