// tb_pe_array: random vectors on an 8-lane array; every lane is compared
// with the f/g formulas, with one shared ctrl per vector.
module tb_pe_array;
  import polar_pkg::*;
  localparam int P = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  llr_t a [P], b [P], c [P];
  logic [P-1:0] u;
  logic ctrl;
  int checks = 0, failures = 0;

  pe_array #(.P(P)) dut (.a(a), .b(b), .u_sum(u), .ctrl(ctrl), .c(c));

  function automatic int val(llr_t v);
    return v[Q-1] ? -int'(v[Q-2:0]) : int'(v[Q-2:0]);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int k = 0; k < P; k++) begin
        a[k] = 6'($urandom); b[k] = 6'($urandom);
      end
      u = P'($urandom);
      ctrl = 1'($urandom);
      @(posedge clk);
      for (int k = 0; k < P; k++) begin
        int va, vb, e;
        va = val(a[k]); vb = val(b[k]);
        if (!ctrl) begin
          e = ((va < 0 ? -va : va) < (vb < 0 ? -vb : vb)) ? (va < 0 ? -va : va) : (vb < 0 ? -vb : vb);
          if (a[k][Q-1] ^ b[k][Q-1]) e = -e;
        end else begin
          e = vb + (u[k] ? -va : va);
          e = (e > 31) ? 31 : ((e < -31) ? -31 : e);
        end
        checks++;
        if (val(c[k]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d: %0d expected %0d", k, val(c[k]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
