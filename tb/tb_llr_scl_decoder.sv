// tb_llr_scl_decoder: end-to-end test of the list decoder at its default
// size, N = 1024, K = 3 (8 bits per list step), L = 4, P = 64.
//
// A (1024, 512) code is built from Bhattacharyya parameters. Each frame has
// random information bits, is encoded, sent over BPSK/AWGN (or noiselessly)
// and quantised to 6-bit LLRs. The decoder's decision and final metric are
// compared with the bit-true reference model in scl_ref_pkg, the noiseless
// frame must return exactly the transmitted bits, and the latency from start
// to done must equal
//   sum_{l=1}^{m-K} 2^l max(1, N/(2^l P)) + 2 N/2^K + 2   (546 here).
// Counted mechanisms, each of which must occur: a survivor copied from a
// different path, a pointer read from another path's bank, a candidate
// removed by zero forcing, a dead list entry, and a saturated path metric.
module tb_llr_scl_decoder;
  import polar_pkg::*;
  import scl_ref_pkg::*;

  localparam int N  = 1024;
  localparam int K  = 3;
  localparam int L  = 4;
  localparam int P  = 64;
  localparam int NB = 2**K;
  localparam int MK = $clog2(N) - K;
  localparam int KINFO = N / 2;
  localparam int NF = 6;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                   ch_we = 1'b0;
  logic [$clog2(N/P)-1:0] ch_addr = '0;
  llr_t                   ch_data [P];
  logic [N-1:0]           frozen_v;
  logic                   start = 1'b0;
  logic                   busy, done;
  logic [N-1:0]           u_hat;

  llr_scl_decoder dut (
    .clk(clk), .rst_n(rst_n), .ch_we(ch_we), .ch_addr(ch_addr), .ch_data(ch_data),
    .frozen(frozen_v), .start(start), .busy(busy), .done(done), .u_hat(u_hat));

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // mechanism counters, sampled on the decoder's own state
  int n_clone = 0, n_shared_read = 0, n_zf = 0, n_dead = 0, n_sat = 0;
  always @(posedge clk) begin
    if (dut.state == S_SORT)
      for (int p = 0; p < L; p++) begin
        if (dut.sel_valid[p] && int'(dut.sel_parent[p]) != p) n_clone++;
        if (!dut.pvalid[p]) n_dead++;
        if (dut.pvalid[p] && dut.pm[p][M-2:0] == PM_MAX[M-2:0]) n_sat++;
      end
    if (dut.state == S_NODE && dut.lvl > 1)
      for (int p = 0; p < L; p++)
        if (int'(dut.ptr[p][dut.rd_lvl]) != p) n_shared_read++;
    if (dut.state == S_MCU)
      for (int c = 0; c < L * 2**NB; c++)
        if (!dut.cand_valid[c] && dut.pvalid[c / 2**NB]) n_zf++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic llr_t to_sm(int v);
    return {v < 0, 5'(v < 0 ? -v : v)};
  endfunction

  initial begin
    bit frz[], u[], x[], ref_u[];
    int llr[];
    int ref_pm, rc, rz, rs, cyc, expect_cyc, n_ok;
    real ebn0 [NF] = '{99.0, 3.0, 2.0, 1.0, 0.0, -2.0};
    frz = new[N]; u = new[N]; x = new[N]; ref_u = new[N]; llr = new[N];
    make_frozen(N, KINFO, frz);
    for (int i = 0; i < N; i++) frozen_v[i] = frz[i];
    expect_cyc = 2 * (N / NB) + 2;
    for (int l = 1; l <= MK; l++) expect_cyc += (1 << l) * (((N >> l) > P) ? (N >> l) / P : 1);
    n_ok = 0;
    for (int k = 0; k < P; k++) ch_data[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      for (int i = 0; i < N; i++) begin
        u[i] = frz[i] ? 1'b0 : 1'($urandom);
        x[i] = u[i];
      end
      polar_encode(x, N);
      if (ebn0[f] > 50.0)
        for (int i = 0; i < N; i++) llr[i] = x[i] ? -12 : 12;
      else
        channel(x, N, $sqrt(1.0 / (2.0 * 0.5 * $pow(10.0, ebn0[f] / 10.0))), 1.0, llr);
      // load the channel buffer, P LLRs per cycle
      for (int w = 0; w < N / P; w++) begin
        ch_we   <= 1'b1;
        ch_addr <= ($clog2(N/P))'(w);
        for (int k = 0; k < P; k++) ch_data[k] <= to_sm(llr[w*P + k]);
        @(posedge clk);
      end
      ch_we <= 1'b0;
      start <= 1'b1;
      @(posedge clk);
      start <= 1'b0;
      // cyc counts clock edges from the one that samples start up to and
      // including the one that raises done; done is looked at between edges
      cyc = 1;
      forever begin
        @(negedge clk);
        if (done) break;
        @(posedge clk);
        cyc++;
      end
      scl_decode(llr, frz, N, K, L, ref_u, ref_pm, rc, rz, rs);
      begin
        bit same_ref, same_tx;
        same_ref = 1; same_tx = 1;
        for (int i = 0; i < N; i++) begin
          if (u_hat[i] != ref_u[i]) same_ref = 0;
          if (u_hat[i] != u[i]) same_tx = 0;
        end
        check(same_ref, $sformatf("frame %0d: decision differs from reference", f));
        check(pm_stoc(dut.pm[dut.best]) == 16'(ref_pm),
              $sformatf("frame %0d: best metric %0d, reference %0d", f,
                        pm_stoc(dut.pm[dut.best]), ref_pm));
        check(cyc == expect_cyc, $sformatf("frame %0d: latency %0d, expected %0d", f, cyc, expect_cyc));
        if (f == 0) check(same_tx, "noiseless frame not decoded to the transmitted bits");
        if (same_tx) n_ok++;
        $display("frame %0d Eb/N0 %0.1f dB: latency %0d cycles, metric %0d, correct %0d",
                 f, ebn0[f], cyc, ref_pm, same_tx);
      end
      @(posedge clk);
    end
    $display("frames decoded correctly: %0d of %0d", n_ok, NF);
    $display("mechanisms: clone %0d shared-read %0d zero-forced %0d dead-entry %0d saturated %0d",
             n_clone, n_shared_read, n_zf, n_dead, n_sat);
    check(n_clone > 0, "no survivor was copied from another path");
    check(n_shared_read > 0, "no read through an inherited memory pointer");
    check(n_zf > 0, "zero forcing never removed a candidate");
    check(n_dead > 0, "list never had a dead entry");
    check(n_sat > 0, "no path metric saturated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
