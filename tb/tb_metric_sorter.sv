// tb_metric_sorter: 1024 random candidates (L = 4, K = 3) with random live
// flags, including rounds with few live candidates and rounds with many
// equal keys. The four survivors must be, in order, the live candidates
// with the largest 7-bit key (metric without its LSB), lower index first on
// equal keys; rounds with fewer than four live candidates report the rest
// as invalid.
module tb_metric_sorter;
  import polar_pkg::*;
  localparam int L = 4, K = 3, C = L * 2**(2**K), IW = $clog2(C);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  metric_t pm [C];
  logic [C-1:0] valid;
  logic [IW-1:0] sel [L];
  logic [L-1:0] sv;
  int checks = 0, failures = 0;

  metric_sorter #(.L(L), .K(K)) dut (.pm(pm), .valid(valid), .sel_idx(sel), .sel_valid(sv));

  function automatic int key(metric_t v);
    return v[M-1] ? -int'(v[M-2:1]) : int'(v[M-2:1]);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 60; t++) begin
      bit taken [C];
      for (int c = 0; c < C; c++) begin
        case (t % 3)
          0: pm[c] = M'($urandom);
          1: pm[c] = {1'b1, 7'(120 + $urandom % 8)};        // many equal keys
          default: pm[c] = {1'b1, 7'($urandom % 128)};
        endcase
        valid[c] = (t % 4 == 3) ? ($urandom % 400 == 0) : ($urandom % 4 != 0);
        taken[c] = 0;
      end
      @(posedge clk);
      for (int r = 0; r < L; r++) begin
        int bi;
        bi = -1;
        for (int c = 0; c < C; c++)
          if (valid[c] && !taken[c] && (bi < 0 || key(pm[c]) > key(pm[bi]))) bi = c;
        if (bi >= 0) taken[bi] = 1;
        checks++;
        if ((bi >= 0) != sv[r] || (bi >= 0 && int'(sel[r]) != bi)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d r=%0d: got %0d/%0d expected %0d", t, r, sel[r], sv[r], bi);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
