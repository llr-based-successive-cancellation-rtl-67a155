// tb_pm_reg_array: reset, frame initialisation (one live path of metric 0)
// and random updates; after each step the stored metrics and flags and the
// best-path index (largest live metric, lowest index on ties) are checked.
module tb_pm_reg_array;
  import polar_pkg::*;
  localparam int L = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic init = 0, upd = 0;
  metric_t npm [L], pm [L];
  logic [L-1:0] nv, v;
  logic [1:0] best;
  int checks = 0, failures = 0;

  pm_reg_array #(.L(L)) dut (.clk(clk), .rst_n(rst_n), .init(init), .upd(upd),
    .new_pm(npm), .new_valid(nv), .pm(pm), .valid(v), .best(best));

  function automatic int val(metric_t x);
    return x[M-1] ? -int'(x[M-2:0]) : int'(x[M-2:0]);
  endfunction

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    metric_t epm [L];
    logic [L-1:0] ev;
    for (int p = 0; p < L; p++) npm[p] = '0;
    nv = '0;
    repeat (2) @(posedge clk);
    #1 chk(v == '0, "reset leaves live paths");
    rst_n = 1;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    chk(v == 4'b0001 && pm[0] == '0, "init");
    chk(best == 0, "best after init");
    for (int t = 0; t < 500; t++) begin
      for (int p = 0; p < L; p++) begin
        epm[p] = {1'b1, 7'($urandom % 16)};
        npm[p] = epm[p];
      end
      ev = L'($urandom);
      if (t % 7 == 0) ev = 4'b1111;
      nv = ev;
      upd = 1; @(negedge clk); upd = 0;
      for (int p = 0; p < L; p++) chk(pm[p] == epm[p] && v[p] == ev[p], "update");
      if (ev != 0) begin
        int bp;
        bp = -1;
        for (int p = 0; p < L; p++) if (ev[p] && (bp < 0 || val(epm[p]) > val(epm[bp]))) bp = p;
        chk(int'(best) == bp, $sformatf("best %0d expected %0d", best, bp));
      end
      @(negedge clk);
      for (int p = 0; p < L; p++) chk(pm[p] == epm[p], "hold without upd");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
