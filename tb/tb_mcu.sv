// tb_mcu: random LLRs and metrics into the K = 3 MCU; all 256 candidate
// metrics are compared with equation (8) evaluated directly:
// M(alpha) = M + sum_j (s_j (1 - out_j) - delta(s_j)), out = alpha U,
// saturated to the 8-bit sign-magnitude range.
module tb_mcu;
  import polar_pkg::*;
  localparam int K = 3, NB = 2**K, NC = 2**NB;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  llr_t s [NB];
  metric_t pm_in, pm_out [NC];
  int checks = 0, failures = 0;

  mcu #(.K(K)) dut (.s(s), .pm_in(pm_in), .pm_out(pm_out));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int sv [NB];
      int pv;
      for (int j = 0; j < NB; j++) begin
        sv[j] = int'($urandom % 63) - 31;
        if (t < 20) sv[j] = int'($urandom % 7) - 3;
        s[j] = {sv[j] < 0, 5'(sv[j] < 0 ? -sv[j] : sv[j])};
      end
      pv = (t % 3 == 0) ? 0 : -int'($urandom % 128);
      pm_in = {pv < 0, 7'(-pv)};
      @(posedge clk);
      for (int a = 0; a < NC; a++) begin
        int e, got;
        e = pv;
        for (int j = 0; j < NB; j++) begin
          int o, d;
          o = 0;
          for (int r = 0; r < NB; r++) if (((a >> r) & 1) && ((j & ~r) == 0)) o ^= 1;
          d = (sv[j] >= 0) ? sv[j] : 0;
          e += sv[j] * (1 - o) - d;
        end
        if (e < -127) e = -127;
        got = pm_out[a][M-1] ? -int'(pm_out[a][M-2:0]) : int'(pm_out[a][M-2:0]);
        checks++;
        if (got != e) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d alpha=%0d: %0d expected %0d", t, a, got, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
