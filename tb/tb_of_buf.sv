// tb_of_buf: checks the double-buffered output buffer (TM = 2 banks, 8
// words per set) against a shadow model. Accumulator writes go to any set
// with a per-bank enable; accumulator reads of one set run alongside drain
// reads of the other set, and both must return, one cycle later, the word at
// their address, including a word written in the same cycle (write-first).
module tb_of_buf;
  import clp_pkg::*;
  localparam int TM = 2, DEPTH = 8, LAW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = !clk;

  logic acc_set = 0, acc_wr_set = 0, dr_en = 0, dr_set = 0;
  logic [TM-1:0] acc_wr_en = '0;
  logic [LAW-1:0] acc_rd_addr = '0, acc_wr_addr = '0, dr_addr = '0;
  word_t acc_rd_data [TM], acc_wr_data [TM], dr_data [TM];

  of_buf #(.TM(TM), .DEPTH(DEPTH)) dut (.clk, .acc_set, .acc_rd_addr, .acc_rd_data, .acc_wr_set,
    .acc_wr_en, .acc_wr_addr, .acc_wr_data, .dr_en, .dr_set, .dr_addr, .dr_data);

  int checks = 0, failures = 0;
  word_t shadow [TM][2][DEPTH];
  word_t want_a [TM], want_d [TM];

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < TM; m++) acc_wr_data[m] = '0;
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        acc_wr_en = '1; acc_wr_set = 1'(s); acc_wr_addr = LAW'(a);
        for (int m = 0; m < TM; m++) begin
          acc_wr_data[m] = $urandom;
          shadow[m][s][a] = acc_wr_data[m];
        end
      end
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      acc_wr_en   = TM'($urandom);
      acc_wr_set  = 1'($urandom);
      acc_wr_addr = LAW'($urandom_range(DEPTH - 1));
      for (int m = 0; m < TM; m++) acc_wr_data[m] = $urandom;
      acc_set     = 1'($urandom);
      acc_rd_addr = ($urandom_range(3) == 0) ? acc_wr_addr : LAW'($urandom_range(DEPTH - 1));
      dr_en       = $urandom_range(1);
      dr_set      = !acc_set;
      dr_addr     = LAW'($urandom_range(DEPTH - 1));
      for (int m = 0; m < TM; m++)
        if (acc_wr_en[m]) shadow[m][acc_wr_set][acc_wr_addr] = acc_wr_data[m];
      for (int m = 0; m < TM; m++) begin
        want_a[m] = shadow[m][acc_set][acc_rd_addr];
        want_d[m] = shadow[m][dr_set][dr_addr];
      end
      @(posedge clk);
      #1;
      for (int m = 0; m < TM; m++) begin
        checks++;
        if (acc_rd_data[m] !== want_a[m]) begin
          failures++;
          if (failures < 10) $display("FAIL acc bank %0d = %h expected %h", m, acc_rd_data[m], want_a[m]);
        end
        if (dr_en) begin
          checks++;
          if (dr_data[m] !== want_d[m]) begin
            failures++;
            if (failures < 10) $display("FAIL drain bank %0d = %h expected %h", m, dr_data[m], want_d[m]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
