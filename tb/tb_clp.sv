// tb_clp: end-to-end test of one CLP (TN=3, TM=4) against the reference
// convolution. Two layers are placed in the table: layer 0 (N=5, M=6, 5x5
// outputs, K=3, S=1, Tr=Tc=2) has partial input-map, output-map, row and
// column tiles, including a 1x1 corner tile that needs a pad cycle; layer 1
// (N=3, M=4, 3x3 outputs, K=2, S=2, Tr=2, Tc=3) exercises the stride. The
// memory drops ready at random. Every output word is compared, the count of
// compute issues must equal Eq. 3 of the paper, and stalls and pads must occur.
module tb_clp;
  import clp_pkg::*;
  import fp_ref_pkg::*;
  import conv_ref_pkg::*;

  localparam int TN = 3, TM = 4, WORDS = 8192;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic cfg_we = 0, cfg_num_we = 0, start = 0, busy, done;
  logic [0:0] cfg_idx = '0;
  layer_desc_t cfg_desc = '0;
  logic [1:0] cfg_num = '0;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_valid, wr_ready;
  addr_t rd_req_addr, wr_addr;
  word_t rd_rsp_data, wr_data;
  logic [31:0] cnt_issue, cnt_stall_in, cnt_stall_of, cnt_pad;
  logic [3:0] rsp_id;

  clp #(.TN(TN), .TM(TM), .MAX_LAYERS(2), .IF_DEPTH(64), .W_DEPTH(16), .OF_DEPTH(8)) dut (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_desc, .cfg_num_we, .cfg_num, .start, .busy, .done,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .cnt_issue, .cnt_stall_in, .cnt_stall_of, .cnt_pad);

  mem_model #(.WORDS(WORDS), .LAT(5)) u_mem (
    .clk, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_id(4'd0),
    .rd_rsp_valid, .rd_rsp_data, .rd_rsp_id(rsp_id),
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  int checks = 0, failures = 0;
  logic [31:0] shadow[];
  layer_desc_t L[2];
  int cycles = 0;

  always @(posedge clk) cycles++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(int base, int words, int span);
    for (int a = base; a < base + words; a++) begin
      shadow[a] = rand_f(span);
      u_mem.mem[a] = shadow[a];
    end
  endtask

  initial begin
    int start_cycle;
    longint want_issue = 0;
    shadow = new[WORDS];
    foreach (shadow[i]) shadow[i] = 32'd0;
    L[0] = mk_layer(5, 6, 5, 5, 3, 1, 2, 2, 0, 1000, 1500, 2000);
    L[1] = mk_layer(3, 4, 3, 3, 2, 2, 2, 3, 3000, 3200, 3300, 3400);
    #1;
    for (int i = 0; i < 2; i++) begin
      fill(int'(L[i].if_base), if_words(L[i]), 3);
      fill(int'(L[i].w_base), w_words(L[i]), 3);
      fill(int'(L[i].b_base), int'(L[i].m), 3);
      want_issue += eq3_cycles(L[i], TN, TM);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 2; i++) begin
      cfg_we <= 1; cfg_idx <= 1'(i); cfg_desc <= L[i];
      @(posedge clk);
    end
    cfg_we <= 0; cfg_num_we <= 1; cfg_num <= 2;
    @(posedge clk);
    cfg_num_we <= 0; start <= 1;
    start_cycle = cycles;
    @(posedge clk);
    start <= 0;
    while (!done) @(posedge clk);
    $display("CLP done after %0d cycles: issue=%0d stall_in=%0d stall_of=%0d pad=%0d",
             cycles - start_cycle, cnt_issue, cnt_stall_in, cnt_stall_of, cnt_pad);
    for (int li = 0; li < 2; li++)
      for (int m = 0; m < int'(L[li].m); m++)
        for (int r = 0; r < int'(L[li].r); r++)
          for (int c = 0; c < int'(L[li].c); c++) begin
            int a;
            logic [31:0] want;
            a    = int'(L[li].of_base) + (m * int'(L[li].r) + r) * int'(L[li].c) + c;
            want = ref_of(shadow, L[li], TN, m, r, c);
            checks++;
            if (u_mem.mem[a] !== want) begin
              failures++;
              if (failures < 10) $display("FAIL layer %0d OF[%0d][%0d][%0d] = %h, expected %h",
                                          li, m, r, c, u_mem.mem[a], want);
            end
          end
    checks++;
    if (longint'(cnt_issue) != want_issue) begin
      failures++;
      $display("FAIL issue cycles %0d, Eq. 3 gives %0d", cnt_issue, want_issue);
    end
    checks++;
    if (cnt_pad == 0) begin failures++; $display("FAIL no pad cycle"); end
    checks++;
    if (cnt_stall_in == 0) begin failures++; $display("FAIL no input stall"); end
    checks++;
    if (u_mem.n_writes != of_words(L[0]) + of_words(L[1])) begin
      failures++; $display("FAIL %0d words written", u_mem.n_writes);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
