// tb_mem_arbiter: checks the shared memory port with G = 4 requesters
// against a behavioural memory with random ready. Each requester issues
// reads of its own address stream and writes at random; every response must
// reach only the requester that asked, in its own order and with the right
// data, every write must land, at most one request is granted per cycle, and
// no requester waits for more than G-1 grants to others (round-robin).
module tb_mem_arbiter;
  import clp_pkg::*;
  localparam int G = 4, N = 200, WORDS = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic [G-1:0] rd_req_valid, rd_req_ready, rd_rsp_valid, wr_valid, wr_ready;
  addr_t rd_req_addr [G], wr_addr [G];
  word_t wr_data [G], rd_rsp_data;
  logic m_rd_req_valid, m_rd_req_ready, m_rd_rsp_valid, m_wr_valid, m_wr_ready;
  addr_t m_rd_req_addr, m_wr_addr;
  word_t m_rd_rsp_data, m_wr_data;
  logic [GW-1:0] m_rd_req_id, m_rd_rsp_id;

  mem_arbiter #(.G(G)) dut (.clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr,
    .rd_rsp_valid, .rd_rsp_data, .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .m_rd_req_valid, .m_rd_req_ready, .m_rd_req_addr, .m_rd_req_id,
    .m_rd_rsp_valid, .m_rd_rsp_data, .m_rd_rsp_id,
    .m_wr_valid, .m_wr_ready, .m_wr_addr, .m_wr_data);

  mem_model #(.WORDS(WORDS), .LAT(3)) u_mem (.clk, .rd_req_valid(m_rd_req_valid),
    .rd_req_ready(m_rd_req_ready), .rd_req_addr(m_rd_req_addr), .rd_req_id(m_rd_req_id),
    .rd_rsp_valid(m_rd_rsp_valid), .rd_rsp_data(m_rd_rsp_data), .rd_rsp_id(m_rd_rsp_id),
    .wr_valid(m_wr_valid), .wr_ready(m_wr_ready), .wr_addr(m_wr_addr), .wr_data(m_wr_data));

  int checks = 0, failures = 0, conflicts = 0;
  int n_req [G], n_rsp [G], n_wr [G], wait_rd [G];
  logic [31:0] init [WORDS];

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Requester g reads addresses g*512 + 0, 1, 2, ... and writes 2048 + g*256 + i.
  always_comb
    for (int g = 0; g < G; g++) begin
      rd_req_addr[g] = addr_t'(g * 512 + n_req[g]);
      wr_addr[g]     = addr_t'(2048 + g * 256 + n_wr[g]);
      wr_data[g]     = 32'hA000_0000 + 32'(g * 256 + n_wr[g]);
    end

  always @(posedge clk) if (rst_n) begin
    if ($countones(rd_req_valid) > 1) conflicts++;
    checks++;
    if ($countones(rd_req_ready) > 1 || $countones(wr_ready) > 1) begin
      failures++; $display("FAIL more than one grant");
    end
    for (int g = 0; g < G; g++) begin
      if (rd_rsp_valid[g]) begin
        checks++;
        if (rd_rsp_data !== init[g * 512 + n_rsp[g]]) begin
          failures++;
          if (failures < 10) $display("FAIL requester %0d response %0d = %h", g, n_rsp[g], rd_rsp_data);
        end
        n_rsp[g]++;
      end
      if (rd_req_valid[g] && rd_req_ready[g]) begin n_req[g]++; wait_rd[g] = 0; end
      else if (rd_req_valid[g] && m_rd_req_valid && m_rd_req_ready) begin
        wait_rd[g]++;
        checks++;
        if (wait_rd[g] > G - 1) begin failures++; $display("FAIL requester %0d starved", g); end
      end
      if (!rd_req_valid[g]) wait_rd[g] = 0;
      if (wr_valid[g] && wr_ready[g]) n_wr[g]++;
    end
  end

  always @(negedge clk)
    for (int g = 0; g < G; g++) begin
      rd_req_valid[g] <= rst_n && n_req[g] < N && $urandom_range(3) != 0;
      wr_valid[g]     <= rst_n && n_wr[g] < N && $urandom_range(1) != 0;
    end

  initial begin
    rd_req_valid = '0; wr_valid = '0;
    for (int g = 0; g < G; g++) begin n_req[g] = 0; n_rsp[g] = 0; n_wr[g] = 0; wait_rd[g] = 0; end
    #1;
    for (int a = 0; a < WORDS; a++) begin
      init[a] = $urandom;
      u_mem.mem[a] = init[a];
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!(n_rsp[0] == N && n_rsp[1] == N && n_rsp[2] == N && n_rsp[3] == N &&
             n_wr[0] == N && n_wr[1] == N && n_wr[2] == N && n_wr[3] == N)) @(posedge clk);
    repeat (5) @(posedge clk);
    for (int g = 0; g < G; g++)
      for (int i = 0; i < N; i++) begin
        checks++;
        if (u_mem.mem[2048 + g * 256 + i] !== 32'hA000_0000 + 32'(g * 256 + i)) begin
          failures++;
          if (failures < 10) $display("FAIL write %0d of requester %0d lost", i, g);
        end
      end
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no conflicting requests"); end
    $display("conflicts=%0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
