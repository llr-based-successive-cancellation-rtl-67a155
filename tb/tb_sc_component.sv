// tb_sc_component: one component decoder with K = 2, P = 8. The PE side is
// checked lane by lane against the f/g formulas; the leaf side against
// equation (8) with zero forcing: each of the 16 candidates must carry
// M + sum_j (s_j (1-out_j) - delta(s_j)) and be valid exactly when the path
// is live and no frozen bit of alpha is 1.
module tb_sc_component;
  import polar_pkg::*;
  localparam int K = 2, P = 8, NB = 4, NC = 16;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  llr_t a [P], b [P], c [P], s [NB];
  logic [P-1:0] us;
  logic ctrl, pv;
  logic [NB-1:0] fr;
  metric_t pm, cpm [NC];
  logic [NC-1:0] cv;
  int checks = 0, failures = 0;

  sc_component #(.K(K), .P(P)) dut (.pe_a(a), .pe_b(b), .pe_usum(us), .pe_ctrl(ctrl),
    .pe_c(c), .leaf_llr(s), .pm_in(pm), .path_valid(pv), .frozen(fr),
    .cand_pm(cpm), .cand_valid(cv));

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
    for (int t = 0; t < 500; t++) begin
      int sv [NB];
      int pmv;
      for (int k = 0; k < P; k++) begin a[k] = llr_t'($urandom); b[k] = llr_t'($urandom); end
      us = P'($urandom); ctrl = 1'($urandom);
      for (int j = 0; j < NB; j++) begin
        sv[j] = int'($urandom % 63) - 31;
        s[j] = {sv[j] < 0, 5'(sv[j] < 0 ? -sv[j] : sv[j])};
      end
      pmv = -int'($urandom % 100);
      pm = {pmv < 0, 7'(-pmv)};
      pv = ($urandom % 4 != 0);
      fr = NB'($urandom);
      @(posedge clk);
      for (int k = 0; k < P; k++) begin
        int va, vb, e;
        va = val(a[k]); vb = val(b[k]);
        if (!ctrl) begin
          e = ((va < 0 ? -va : va) < (vb < 0 ? -vb : vb)) ? (va < 0 ? -va : va) : (vb < 0 ? -vb : vb);
          if (a[k][Q-1] ^ b[k][Q-1]) e = -e;
        end else begin
          e = vb + (us[k] ? -va : va);
          e = (e > 31) ? 31 : ((e < -31) ? -31 : e);
        end
        checks++;
        if (val(c[k]) != e) failures++;
      end
      for (int al = 0; al < NC; al++) begin
        int e, got;
        bit keep;
        e = pmv;
        keep = pv;
        for (int j = 0; j < NB; j++) begin
          int o;
          o = 0;
          for (int r = 0; r < NB; r++) if (((al >> r) & 1) && ((j & ~r) == 0)) o ^= 1;
          e += sv[j] * (1 - o) - ((sv[j] >= 0) ? sv[j] : 0);
          if (fr[j] && ((al >> j) & 1)) keep = 0;
        end
        if (e < -127) e = -127;
        got = cpm[al][M-1] ? -int'(cpm[al][M-2:0]) : int'(cpm[al][M-2:0]);
        checks++;
        if (cv[al] != keep || (keep && got != e)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d alpha=%0d: %0d/%0d expected %0d/%0d", t, al, got, cv[al], e, keep);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
