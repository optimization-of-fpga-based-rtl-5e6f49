// tb_multi_clp_top: end-to-end test of the full-size Multi-CLP accelerator
// (default parameters: four CLPs of <3,24>, <3,24>, <16,11>, <16,8>).
//
// Each CLP receives its own small layers, sized to fit its buffers and chosen
// to hit partial Tn/Tm tiles, strides, 1x1 kernels, 1x1 corner tiles and a
// third table entry. Two episodes run; between them the input maps are
// replaced, as a new image would be. After each episode every output word of
// every layer is compared with the reference convolution, each CLP's issue
// count must equal Eq. 3 of the paper, and the episode must last at least as
// long as the slowest CLP. The test counts and requires each mechanism:
// input stalls, output-buffer stalls, pad cycles, memory-port conflicts
// between CLPs, CLPs waiting at the episode barrier, and completed episodes.
module tb_multi_clp_top;
  import clp_pkg::*;
  import fp_ref_pkg::*;
  import conv_ref_pkg::*;

  localparam int G = 4, WORDS = 32768, EPISODES = 2;
  localparam int TNS [G] = '{3, 3, 16, 16};
  localparam int TMS [G] = '{24, 24, 11, 8};

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

  mem_model #(.WORDS(WORDS), .LAT(6)) u_mem (
    .clk, .rd_req_valid(m_rd_req_valid), .rd_req_ready(m_rd_req_ready),
    .rd_req_addr(m_rd_req_addr), .rd_req_id(m_rd_req_id),
    .rd_rsp_valid(m_rd_rsp_valid), .rd_rsp_data(m_rd_rsp_data), .rd_rsp_id(m_rd_rsp_id),
    .wr_valid(m_wr_valid), .wr_ready(m_wr_ready), .wr_addr(m_wr_addr), .wr_data(m_wr_data));

  int checks = 0, failures = 0;
  int cycles = 0, n_conflict = 0, n_barrier_wait = 0;
  logic [31:0] shadow[];
  layer_desc_t L [G][3];
  int nl [G] = '{2, 2, 3, 2};

  always @(posedge clk) begin
    cycles++;
    if ($countones(dut.rd_req_valid) > 1) n_conflict++;
    if (busy && (dut.clp_busy != '1)) n_barrier_wait++;
  end

  initial begin
    repeat (600000) @(posedge clk);
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

  // Places a layer at the next free memory address.
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

  task automatic check_episode(int ep);
    longint want_issue;
    int stall_in, stall_of, pad;
    for (int g = 0; g < G; g++) begin
      want_issue = 0;
      for (int li = 0; li < nl[g]; li++) begin
        want_issue += eq3_cycles(L[g][li], TNS[g], TMS[g]);
        for (int m = 0; m < int'(L[g][li].m); m++)
          for (int r = 0; r < int'(L[g][li].r); r++)
            for (int c = 0; c < int'(L[g][li].c); c++) begin
              int a;
              logic [31:0] want;
              a    = int'(L[g][li].of_base) + (m * int'(L[g][li].r) + r) * int'(L[g][li].c) + c;
              want = ref_of(shadow, L[g][li], TNS[g], m, r, c);
              checks++;
              if (u_mem.mem[a] !== want) begin
                failures++;
                if (failures < 10) $display("FAIL ep %0d CLP %0d layer %0d OF[%0d][%0d][%0d] = %h, expected %h",
                                            ep, g, li, m, r, c, u_mem.mem[a], want);
              end
            end
      end
      checks++;
      if (longint'(cnt_issue[g]) != want_issue) begin
        failures++;
        $display("FAIL ep %0d CLP %0d issue cycles %0d, Eq. 3 gives %0d", ep, g, cnt_issue[g], want_issue);
      end
      checks++;
      if (ep_cycles < cnt_issue[g]) begin
        failures++;
        $display("FAIL ep %0d lasted %0d cycles, shorter than CLP %0d", ep, ep_cycles, g);
      end
      $display("ep %0d CLP %0d: issue=%0d (Eq. 3 %0d) stall_in=%0d stall_of=%0d pad=%0d",
               ep, g, cnt_issue[g], want_issue, cnt_stall_in[g], cnt_stall_of[g], cnt_pad[g]);
    end
  endtask

  initial begin
    int next;
    int stall_in, stall_of, pad;
    stall_in = 0; stall_of = 0; pad = 0;
    shadow = new[WORDS];
    foreach (shadow[i]) shadow[i] = 32'd0;
    next = 0;
    // CLP0 <3,24>: stride 2, partial n and m tiles; then 1x1 corner tiles.
    L[0][0] = place(4, 26, 4, 4, 3, 2, 2, 2, next);
    L[0][1] = place(3, 5, 3, 3, 2, 1, 2, 2, next);
    // CLP1 <3,24>: M = Tm exactly; 1x1 corner tiles.
    L[1][0] = place(3, 24, 3, 3, 3, 1, 2, 2, next);
    L[1][1] = place(5, 7, 3, 3, 3, 2, 3, 3, next);
    // CLP2 <16,11>: three layers, the second a 1x1 kernel that the
    // write-back cannot keep up with.
    L[2][0] = place(17, 12, 3, 3, 3, 1, 3, 3, next);
    L[2][1] = place(1, 11, 16, 16, 1, 1, 8, 8, next);
    L[2][2] = place(5, 3, 3, 3, 2, 1, 3, 3, next);
    // CLP3 <16,8>
    L[3][0] = place(20, 9, 3, 3, 3, 1, 2, 2, next);
    L[3][1] = place(8, 8, 2, 2, 3, 1, 2, 2, next);
    if (next > WORDS) $fatal(1, "memory image too large: %0d words", next);
    #1;
    for (int g = 0; g < G; g++)
      for (int li = 0; li < nl[g]; li++) begin
        fill(int'(L[g][li].if_base), if_words(L[g][li]), 3);
        fill(int'(L[g][li].w_base), w_words(L[g][li]), 3);
        fill(int'(L[g][li].b_base), int'(L[g][li].m), 3);
      end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int g = 0; g < G; g++) begin
      for (int li = 0; li < nl[g]; li++) begin
        cfg_we <= 1; cfg_clp <= GW'(g); cfg_idx <= 2'(li); cfg_desc <= L[g][li];
        @(posedge clk);
      end
      cfg_we <= 0; cfg_num_we <= 1; cfg_clp <= GW'(g); cfg_num <= 2'(nl[g]);
      @(posedge clk);
      cfg_num_we <= 0;
    end
    for (int ep = 0; ep < EPISODES; ep++) begin
      if (ep > 0)
        for (int g = 0; g < G; g++)
          for (int li = 0; li < nl[g]; li++) fill(int'(L[g][li].if_base), if_words(L[g][li]), 3);
      start <= 1;
      @(posedge clk);
      start <= 0;
      while (!done) @(posedge clk);
      @(posedge clk);
      $display("episode %0d done after %0d cycles", ep, ep_cycles);
      check_episode(ep);
      for (int g = 0; g < G; g++) begin
        stall_in += int'(cnt_stall_in[g]);
        stall_of += int'(cnt_stall_of[g]);
        pad      += int'(cnt_pad[g]);
      end
    end
    $display("mechanisms: stall_in=%0d stall_of=%0d pad=%0d conflicts=%0d barrier_wait=%0d episodes=%0d",
             stall_in, stall_of, pad, n_conflict, n_barrier_wait, episodes);
    checks++;
    if (stall_in == 0) begin failures++; $display("FAIL no input stall"); end
    checks++;
    if (stall_of == 0) begin failures++; $display("FAIL no output-buffer stall"); end
    checks++;
    if (pad == 0) begin failures++; $display("FAIL no pad cycle"); end
    checks++;
    if (n_conflict == 0) begin failures++; $display("FAIL no memory-port conflict"); end
    checks++;
    if (n_barrier_wait == 0) begin failures++; $display("FAIL no CLP waited at the barrier"); end
    checks++;
    if (episodes != EPISODES) begin failures++; $display("FAIL %0d episodes counted", episodes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
