// tb_episode_ctrl: checks the episode barrier with G = 4 model CLPs that
// finish after random delays. Every CLP must get exactly one start pulse per
// episode, done must pulse exactly one cycle after the last CLP finishes and
// not before, the episode count must advance by one, and the reported
// episode length must match the cycles counted here.
module tb_episode_ctrl;
  localparam int G = 4, EPS = 50;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic start = 0, busy, done;
  logic [G-1:0] clp_start, clp_done;
  logic [31:0] episodes, ep_cycles;

  episode_ctrl #(.G(G)) dut (.clk, .rst_n, .start, .busy, .done, .clp_start, .clp_done,
                             .episodes, .ep_cycles);

  int checks = 0, failures = 0;
  int delay [G];
  int last, cyc, starts;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clp_done = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < EPS; e++) begin
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      checks++;
      if (clp_start !== '1) begin failures++; $display("FAIL episode %0d start pulses %b", e, clp_start); end
      last = 0;
      for (int g = 0; g < G; g++) begin
        delay[g] = $urandom_range(1, 30);
        if (delay[g] > last) last = delay[g];
      end
      starts = 0;
      for (cyc = 1; cyc <= last + 3; cyc++) begin
        for (int g = 0; g < G; g++) clp_done[g] = (cyc == delay[g]);
        @(negedge clk);
        if (clp_start != '0) starts++;
        checks++;
        if (done !== (cyc == last)) begin
          failures++;
          $display("FAIL episode %0d cycle %0d done=%b (last CLP at %0d)", e, cyc, done, last);
        end
        if (done) begin
          checks++;
          if (episodes !== 32'(e + 1) || ep_cycles !== 32'(last)) begin
            failures++;
            $display("FAIL episode %0d count %0d length %0d, expected %0d", e, episodes, ep_cycles, last);
          end
        end
      end
      clp_done = '0;
      checks++;
      if (starts != 0 || busy) begin failures++; $display("FAIL extra start or still busy"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
