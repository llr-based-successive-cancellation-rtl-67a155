// tb_pe: exhaustive check of the processing element against integer
// formulas: f = sign(a)sign(b)min(|a|,|b|), g = b + (-1)^u a saturated to +-31.
module tb_pe;
  import polar_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  llr_t a, b, c;
  logic u, ctrl;
  int checks = 0, failures = 0;

  pe dut (.a(a), .b(b), .u_sum(u), .ctrl(ctrl), .c(c));

  function automatic int val(llr_t v);
    return v[Q-1] ? -int'(v[Q-2:0]) : int'(v[Q-2:0]);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ia = 0; ia < 64; ia++)
      for (int ib = 0; ib < 64; ib++)
        for (int m = 0; m < 4; m++) begin
          int va, vb, e, got;
          a = 6'(ia); b = 6'(ib); u = m[0]; ctrl = m[1];
          @(posedge clk);
          va = val(a); vb = val(b);
          if (!ctrl) begin
            e = ((va < 0 ? -va : va) < (vb < 0 ? -vb : vb)) ? (va < 0 ? -va : va) : (vb < 0 ? -vb : vb);
            if (a[Q-1] ^ b[Q-1]) e = -e;
          end else begin
            e = vb + (u ? -va : va);
            if (e > 31) e = 31;
            if (e < -31) e = -31;
          end
          got = val(c);
          checks++;
          if (got != e) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d b=%0d u=%0d ctrl=%0d: %0d expected %0d", va, vb, u, ctrl, got, e);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
