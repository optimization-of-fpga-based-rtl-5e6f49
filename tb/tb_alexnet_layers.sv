// tb_alexnet_layers: runs real AlexNet CONV layers, at their full size, on the
// default accelerator, one layer per CLP in a single episode:
//   CLP0 <3,24>   layer 1a  N=3   M=48  R=C=55 K=11 S=4  Tr=Tc=8
//   CLP1 <3,24>   layer 4b  N=192 M=192 R=C=13 K=3  S=1  Tr=Tc=13
//   CLP2 <16,11>  layer 2a  N=48  M=128 R=C=27 K=5  S=1  Tr=Tc=27
//   CLP3 <16,8>   layer 3a  N=256 M=192 R=C=13 K=3  S=1  Tr=Tc=13
// (group sizes of the two-group AlexNet; inputs stored with their zero
// padding). Each CLP's engine issue count must equal its Eq. 3 count, which
// are 732,050, 778,752, 656,100 and 584,064 cycles, and 200 randomly chosen
// output words per layer are compared with the reference convolution. Layer
// data are random, between 1/4 and 8 in magnitude, so sums stay well inside FP32 range.
module tb_alexnet_layers;
  import clp_pkg::*;
  import fp_ref_pkg::*;
  import conv_ref_pkg::*;

  localparam int G = 4, WORDS = 1700000, SAMPLES = 200;
  localparam int TNS [G] = '{3, 3, 16, 16};
  localparam int TMS [G] = '{24, 24, 11, 8};
  localparam longint EQ3 [G] = '{732050, 778752, 656100, 584064};

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic cfg_we = 0, cfg_num_we = 0, start = 0, busy, done;
  logic [GW-1:0] cfg_clp = '0;
  logic [1:0] cfg_idx = '0;
  layer_desc_t cfg_desc = '0;
  logic [1:0] cfg_num = '0;
  logic [31:0] episodes, ep_cycles;
  logic m_rd_req_valid, m_rd_req_ready, m_rd_rsp_valid, m_wr_valid, m_wr_ready;
  addr_t m_rd_req_addr, m_wr_addr;
  word_t m_rd_rsp_data, m_wr_data;
  logic [GW-1:0] m_rd_req_id, m_rd_rsp_id;
  logic [31:0] cnt_issue [G], cnt_stall_in [G], cnt_stall_of [G], cnt_pad [G];

  multi_clp_top dut (
    .clk, .rst_n, .cfg_we, .cfg_clp, .cfg_idx, .cfg_desc, .cfg_num_we, .cfg_num,
    .start, .busy, .done, .episodes, .ep_cycles,
    .m_rd_req_valid, .m_rd_req_ready, .m_rd_req_addr, .m_rd_req_id,
    .m_rd_rsp_valid, .m_rd_rsp_data, .m_rd_rsp_id,
    .m_wr_valid, .m_wr_ready, .m_wr_addr, .m_wr_data,
    .cnt_issue, .cnt_stall_in, .cnt_stall_of, .cnt_pad);

  mem_model #(.WORDS(WORDS), .LAT(8), .RANDOM_READY(1'b0)) u_mem (
    .clk, .rd_req_valid(m_rd_req_valid), .rd_req_ready(m_rd_req_ready),
    .rd_req_addr(m_rd_req_addr), .rd_req_id(m_rd_req_id),
    .rd_rsp_valid(m_rd_rsp_valid), .rd_rsp_data(m_rd_rsp_data), .rd_rsp_id(m_rd_rsp_id),
    .wr_valid(m_wr_valid), .wr_ready(m_wr_ready), .wr_addr(m_wr_addr), .wr_data(m_wr_data));

  int checks = 0, failures = 0;
  logic [31:0] shadow[];
  layer_desc_t L [G];

  initial begin
    repeat (8000000) @(posedge clk);
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

  function automatic layer_desc_t place(int n, int m, int r, int c, int k, int s, int tr, int tc,
                                        ref int next);
    layer_desc_t d;
    int ib, wb, bb, ob;
    d  = mk_layer(n, m, r, c, k, s, tr, tc, 0, 0, 0, 0);
    ib = next;
    wb = ib + if_words(d);
    bb = wb + w_words(d);
    ob = bb + m;
    next = ob + of_words(d);
    place = mk_layer(n, m, r, c, k, s, tr, tc, ib, wb, bb, ob);
  endfunction

  initial begin
    int next;
    shadow = new[WORDS];
    next = 0;
    L[0] = place(3, 48, 55, 55, 11, 4, 8, 8, next);
    L[1] = place(192, 192, 13, 13, 3, 1, 13, 13, next);
    L[2] = place(48, 128, 27, 27, 5, 1, 27, 27, next);
    L[3] = place(256, 192, 13, 13, 3, 1, 13, 13, next);
    if (next > WORDS) $fatal(1, "memory image too large: %0d words", next);
    #1;
    for (int a = 0; a < WORDS; a++) shadow[a] = 32'd0;
    for (int g = 0; g < G; g++) begin
      fill(int'(L[g].if_base), if_words(L[g]), 2);
      fill(int'(L[g].w_base), w_words(L[g]), 2);
      fill(int'(L[g].b_base), int'(L[g].m), 1);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int g = 0; g < G; g++) begin
      cfg_we <= 1; cfg_clp <= GW'(g); cfg_idx <= '0; cfg_desc <= L[g];
      @(posedge clk);
      cfg_we <= 0; cfg_num_we <= 1; cfg_num <= 2'd1;
      @(posedge clk);
      cfg_num_we <= 0;
    end
    start <= 1;
    @(posedge clk);
    start <= 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    $display("episode done after %0d cycles", ep_cycles);
    for (int g = 0; g < G; g++) begin
      $display("CLP %0d: issue=%0d (Eq. 3 %0d) stall_in=%0d stall_of=%0d pad=%0d",
               g, cnt_issue[g], EQ3[g], cnt_stall_in[g], cnt_stall_of[g], cnt_pad[g]);
      checks++;
      if (longint'(cnt_issue[g]) != EQ3[g] || eq3_cycles(L[g], TNS[g], TMS[g]) != EQ3[g]) begin
        failures++;
        $display("FAIL CLP %0d issue count %0d, Eq. 3 gives %0d", g, cnt_issue[g], EQ3[g]);
      end
      for (int q = 0; q < SAMPLES; q++) begin
        int m, r, c, a;
        logic [31:0] want;
        m = $urandom_range(int'(L[g].m) - 1);
        r = $urandom_range(int'(L[g].r) - 1);
        c = $urandom_range(int'(L[g].c) - 1);
        a = int'(L[g].of_base) + (m * int'(L[g].r) + r) * int'(L[g].c) + c;
        want = ref_of(shadow, L[g], TNS[g], m, r, c);
        checks++;
        if (u_mem.mem[a] !== want) begin
          failures++;
          if (failures < 10) $display("FAIL CLP %0d OF[%0d][%0d][%0d] = %h, expected %h",
                                      g, m, r, c, u_mem.mem[a], want);
        end
      end
    end
    checks++;
    if (u_mem.n_writes != of_words(L[0]) + of_words(L[1]) + of_words(L[2]) + of_words(L[3])) begin
      failures++;
      $display("FAIL %0d words written", u_mem.n_writes);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
