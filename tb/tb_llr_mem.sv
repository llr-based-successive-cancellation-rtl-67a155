// tb_llr_mem: one bank with N = 64, K = 2, P = 8 (levels of 32, 16, 8 and
// 4 LLRs). Random nodes are written chunk by chunk into every level and a
// software copy is kept; every read chunk of every level must return the
// node's two halves as f/g operand pairs (0 past the half), and the leaf
// port the level-4 node.
module tb_llr_mem;
  import polar_pkg::*;
  localparam int N = 64, K = 2, P = 8, NB = 4, MK = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [2:0] wl, rl;
  logic [3:0] wc, rc;
  llr_t wd [P], ra [P], rb [P], leaf [NB];
  int checks = 0, failures = 0;

  llr_mem #(.N(N), .K(K), .P(P)) dut (.clk(clk), .we(we), .wr_level(wl), .wr_chunk(wc),
    .wr_data(wd), .rd_level(rl), .rd_chunk(rc), .rd_a(ra), .rd_b(rb), .leaf(leaf));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    llr_t node [MK+1][N];
    rl = 3'd1; rc = '0; wl = 3'd1; wc = '0;
    for (int k = 0; k < P; k++) wd[k] = '0;
    for (int t = 0; t < 40; t++) begin
      for (int l = 1; l <= MK; l++) begin
        int nl, nch;
        nl = N >> l;
        nch = (nl > P) ? nl / P : 1;
        for (int c = 0; c < nch; c++) begin
          @(negedge clk);
          we = 1; wl = 3'(l); wc = 4'(c);
          for (int k = 0; k < P; k++) begin
            wd[k] = llr_t'($urandom);
            if (c * P + k < nl) node[l][c*P + k] = wd[k];
          end
        end
      end
      @(negedge clk);
      we = 0;
      for (int l = 1; l < MK; l++) begin
        int h, nch;
        h = N >> (l + 1);
        nch = (h > P) ? h / P : 1;
        for (int c = 0; c < nch; c++) begin
          rl = 3'(l); rc = 4'(c);
          #1;
          for (int k = 0; k < P; k++) begin
            llr_t ea, eb;
            ea = (c * P + k < h) ? node[l][c*P + k] : '0;
            eb = (c * P + k < h) ? node[l][h + c*P + k] : '0;
            checks++;
            if (ra[k] != ea || rb[k] != eb) begin
              failures++;
              if (failures < 10) $display("FAIL level %0d chunk %0d lane %0d", l, c, k);
            end
          end
        end
      end
      for (int j = 0; j < NB; j++) begin
        checks++;
        if (leaf[j] != node[MK][j]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
