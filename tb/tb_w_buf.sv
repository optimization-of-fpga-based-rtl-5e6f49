// tb_w_buf: checks the double-buffered weight buffer (TN = 2, TM = 3, so 6
// banks, 9 words per set) and its per-set bias registers against a shadow
// model. Every read returns, one cycle later, the TM x TN weights at the
// address (write-first) and the TM biases of the set as they were before
// that cycle's bias write.
module tb_w_buf;
  import clp_pkg::*;
  localparam int TN = 2, TM = 3, DEPTH = 9, LAW = $clog2(DEPTH);
  localparam int BW = $clog2(TN * TM + 1);
  logic clk = 0;
  always #5 clk = !clk;

  logic wr_en = 0, wr_set = 0, rd_set = 0, b_wr_en = 0;
  logic [BW-1:0] wr_bank = '0;
  logic [$clog2(TM+1)-1:0] b_wr_mt = '0;
  logic [LAW-1:0] wr_addr = '0, rd_addr = '0;
  word_t wr_data = '0, rd_data [TM][TN], rd_bias [TM];

  w_buf #(.TN(TN), .TM(TM), .DEPTH(DEPTH)) dut (.clk, .wr_en, .wr_bank, .wr_set, .wr_addr,
    .wr_data, .b_wr_en, .b_wr_mt, .rd_set, .rd_addr, .rd_data, .rd_bias);

  int checks = 0, failures = 0;
  word_t shadow [TN*TM][2][DEPTH];
  word_t bsh [2][TM];
  word_t want [TM][TN], wantb [TM];

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < TN * TM; b++)
      for (int s = 0; s < 2; s++)
        for (int a = 0; a < DEPTH; a++) begin
          @(negedge clk);
          wr_en = 1; wr_bank = BW'(b); wr_set = 1'(s); wr_addr = LAW'(a); wr_data = $urandom;
          shadow[b][s][a] = wr_data;
        end
    @(negedge clk);
    wr_en = 0;
    for (int s = 0; s < 2; s++)
      for (int m = 0; m < TM; m++) begin
        @(negedge clk);
        b_wr_en = 1; wr_set = 1'(s); b_wr_mt = 2'(m); wr_data = $urandom;
        bsh[s][m] = wr_data;
      end
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      b_wr_en = ($urandom_range(3) == 0);
      wr_en   = !b_wr_en && $urandom_range(1);
      wr_bank = BW'($urandom_range(TN * TM - 1));
      b_wr_mt = 2'($urandom_range(TM - 1));
      wr_set  = 1'($urandom);
      wr_addr = LAW'($urandom_range(DEPTH - 1));
      wr_data = $urandom;
      rd_set  = 1'($urandom);
      rd_addr = ($urandom_range(3) == 0) ? wr_addr : LAW'($urandom_range(DEPTH - 1));
      for (int m = 0; m < TM; m++) wantb[m] = bsh[rd_set][m];
      if (b_wr_en) bsh[wr_set][b_wr_mt] = wr_data;
      if (wr_en) shadow[wr_bank][wr_set][wr_addr] = wr_data;
      for (int m = 0; m < TM; m++)
        for (int n = 0; n < TN; n++) want[m][n] = shadow[m*TN+n][rd_set][rd_addr];
      @(posedge clk);
      #1;
      for (int m = 0; m < TM; m++) begin
        checks++;
        if (rd_bias[m] !== wantb[m]) begin
          failures++;
          if (failures < 10) $display("FAIL bias %0d = %h expected %h", m, rd_bias[m], wantb[m]);
        end
        for (int n = 0; n < TN; n++) begin
          checks++;
          if (rd_data[m][n] !== want[m][n]) begin
            failures++;
            if (failures < 10) $display("FAIL w[%0d][%0d] = %h expected %h", m, n, rd_data[m][n], want[m][n]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
