// tb_channel_buffer: a random 64-LLR frame is loaded 8 LLRs per cycle and
// every read chunk must return y[c*P+k] and y[N/2+c*P+k]; a second frame
// overwrites the first.
module tb_channel_buffer;
  import polar_pkg::*;
  localparam int N = 64, P = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [2:0] wa;
  logic [3:0] rc;
  llr_t wd [P], ra [P], rb [P];
  int checks = 0, failures = 0;

  channel_buffer #(.N(N), .P(P)) dut (.clk(clk), .we(we), .wr_addr(wa), .wr_data(wd),
    .rd_chunk(rc), .rd_a(ra), .rd_b(rb));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    llr_t y [N];
    wa = '0; rc = '0;
    for (int t = 0; t < 20; t++) begin
      for (int w = 0; w < N / P; w++) begin
        @(negedge clk);
        we = 1; wa = 3'(w);
        for (int k = 0; k < P; k++) begin
          wd[k] = llr_t'($urandom);
          y[w*P + k] = wd[k];
        end
      end
      @(negedge clk);
      we = 0;
      for (int c = 0; c < N / 2 / P; c++) begin
        rc = 4'(c);
        #1;
        for (int k = 0; k < P; k++) begin
          checks++;
          if (ra[k] != y[c*P + k] || rb[k] != y[N/2 + c*P + k]) begin
            failures++;
            if (failures < 10) $display("FAIL chunk %0d lane %0d", c, k);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
