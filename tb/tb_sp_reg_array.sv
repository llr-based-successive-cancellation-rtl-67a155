// tb_sp_reg_array: a software list of N = 64 bit paths (K = 2, L = 4) is
// extended block by block with random parents and extensions; after each
// update every stored path must equal its parent's old bits with block blk
// replaced by alpha.
module tb_sp_reg_array;
  localparam int N = 64, K = 2, L = 4, NB = 4, BW = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic upd = 0;
  logic [1:0] parent [L];
  logic [NB-1:0] alpha [L];
  logic [BW-1:0] blk;
  logic [N-1:0] u [L];
  int checks = 0, failures = 0;

  sp_reg_array #(.N(N), .K(K), .L(L)) dut (.clk(clk), .upd(upd), .parent(parent),
    .alpha(alpha), .blk(blk), .u(u));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] model [L], nm [L];
    for (int p = 0; p < L; p++) begin parent[p] = '0; alpha[p] = '0; end
    blk = '0;
    // first step: all paths from path 0, giving a known start for the model
    for (int b = 0; b < N / NB; b++) begin
      blk = BW'(b);
      for (int p = 0; p < L; p++) begin parent[p] = 2'(p); alpha[p] = '0; end
      @(negedge clk); upd = 1; @(negedge clk); upd = 0;
    end
    for (int p = 0; p < L; p++) model[p] = '0;
    for (int t = 0; t < 300; t++) begin
      blk = BW'($urandom);
      for (int p = 0; p < L; p++) begin
        parent[p] = 2'($urandom);
        alpha[p]  = NB'($urandom);
      end
      for (int p = 0; p < L; p++) begin
        nm[p] = model[parent[p]];
        nm[p][blk*NB +: NB] = alpha[p];
      end
      upd = 1; @(negedge clk); upd = 0;
      for (int p = 0; p < L; p++) begin
        model[p] = nm[p];
        checks++;
        if (u[p] != model[p]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d path %0d", t, p);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
