// tb_if_buf: checks the double-buffered input buffer (TN = 3 banks, 20
// words per set) against a shadow array. Random writes to any bank and set
// run alongside random reads of any set; every read must return, one cycle
// later, the word of all TN banks at that address, including a word written
// in the same cycle (write-first).
module tb_if_buf;
  import clp_pkg::*;
  localparam int TN = 3, DEPTH = 20, LAW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = !clk;

  logic wr_en = 0, wr_set = 0, rd_set = 0;
  logic [$clog2(TN+1)-1:0] wr_bank = '0;
  logic [LAW-1:0] wr_addr = '0, rd_addr = '0;
  word_t wr_data = '0, rd_data [TN];

  if_buf #(.TN(TN), .DEPTH(DEPTH)) dut (.clk, .wr_en, .wr_bank, .wr_set, .wr_addr, .wr_data,
                                        .rd_set, .rd_addr, .rd_data);

  int checks = 0, failures = 0;
  word_t shadow [TN][2][DEPTH];
  word_t want [TN];

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill everything first
    for (int b = 0; b < TN; b++)
      for (int s = 0; s < 2; s++)
        for (int a = 0; a < DEPTH; a++) begin
          @(negedge clk);
          wr_en = 1; wr_bank = 2'(b); wr_set = 1'(s); wr_addr = LAW'(a); wr_data = $urandom;
          shadow[b][s][a] = wr_data;
        end
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      wr_en   = $urandom_range(1);
      wr_bank = 2'($urandom_range(TN - 1));
      wr_set  = 1'($urandom);
      wr_addr = LAW'($urandom_range(DEPTH - 1));
      wr_data = $urandom;
      rd_set  = 1'($urandom);
      rd_addr = ($urandom_range(3) == 0) ? wr_addr : LAW'($urandom_range(DEPTH - 1));
      if (wr_en) shadow[wr_bank][wr_set][wr_addr] = wr_data;
      for (int b = 0; b < TN; b++) want[b] = shadow[b][rd_set][rd_addr];
      @(posedge clk);
      #1;
      for (int b = 0; b < TN; b++) begin
        checks++;
        if (rd_data[b] !== want[b]) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d set %0d addr %0d = %h expected %h",
                                      b, rd_set, rd_addr, rd_data[b], want[b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
