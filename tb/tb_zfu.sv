// tb_zfu: random frozen patterns, parent flags and metrics; each of the
// 256 candidates must be kept (metric unchanged) exactly when the parent is
// live and no frozen position of alpha is 1, and otherwise get the
// minus-infinity word.
module tb_zfu;
  import polar_pkg::*;
  localparam int K = 3, NB = 2**K, NC = 2**NB;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  metric_t pin [NC], pout [NC];
  logic [NB-1:0] frozen;
  logic pvld;
  logic [NC-1:0] valid;
  int checks = 0, failures = 0;

  zfu #(.K(K)) dut (.pm_in(pin), .frozen(frozen), .parent_valid(pvld), .pm_out(pout), .valid(valid));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      frozen = NB'($urandom);
      pvld = (t % 5 != 0);
      for (int a = 0; a < NC; a++) pin[a] = M'($urandom);
      @(posedge clk);
      for (int a = 0; a < NC; a++) begin
        bit keep;
        keep = pvld;
        for (int j = 0; j < NB; j++) if (frozen[j] && a[j]) keep = 0;
        checks++;
        if (valid[a] != keep || pout[a] != (keep ? pin[a] : 8'hFF)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d alpha=%0d", t, a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
