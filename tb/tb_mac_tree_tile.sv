// tb_mac_tree_tile: checks one MAC tree (TN = 5, so a 3-level tree over 8
// lanes with 3 zero lanes) against the reference FP32 model. Random operands,
// lane masks, bias selects and gaps in valid are driven every cycle; the
// running-sum input is supplied LV+1 cycles after issue, as the controller
// does, and each result must appear exactly LV+2 cycles after issue.
module tb_mac_tree_tile;
  import clp_pkg::*;
  import fp_ref_pkg::*;
  import conv_ref_pkg::*;

  localparam int TN = 5, LV = 3, NP = 8, OPS = 3000, H = OPS + 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic valid_in = 0, use_bias = 0, valid_out;
  word_t feat [TN], wgt [TN];
  logic [TN-1:0] lane_en = '0;
  word_t bias = '0, acc_in = '0, acc_out;

  mac_tree_tile #(.TN(TN)) dut (.clk, .rst_n, .valid_in, .feat, .wgt, .lane_en, .bias,
                                .use_bias, .acc_in, .valid_out, .acc_out);

  int checks = 0, failures = 0;
  logic   v_h [H];
  word_t  exp_h [H];
  word_t  sum_h [H];
  word_t  acc_h [H];

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lanes_t lanes;
    word_t op;
    for (int i = 0; i < TN; i++) begin feat[i] = '0; wgt[i] = '0; end
    for (int i = 0; i < H; i++) begin v_h[i] = 0; exp_h[i] = '0; sum_h[i] = '0; acc_h[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < OPS + LV + 3; k++) begin
      @(negedge clk);
      // result of the op issued LV+2 cycles ago
      if (k >= LV + 2) begin
        checks++;
        if (valid_out !== v_h[k-LV-2]) begin
          failures++;
          $display("FAIL cycle %0d valid_out=%b expected %b", k, valid_out, v_h[k-LV-2]);
        end else if (v_h[k-LV-2] && acc_out !== exp_h[k-LV-2]) begin
          failures++;
          if (failures < 10) $display("FAIL op %0d acc_out=%h expected %h", k-LV-2, acc_out, exp_h[k-LV-2]);
        end
      end
      // running sum for the op issued LV+1 cycles ago
      if (k >= LV + 1) begin
        acc_in = acc_h[k-LV-1];
        if (!use_bias_h(k-LV-1)) exp_h[k-LV-1] = fadd(sum_h[k-LV-1], acc_in);
      end
      if (k < OPS) begin
        valid_in = ($urandom_range(4) != 0);
        lane_en  = TN'($urandom);
        use_bias = ($urandom_range(3) == 0);
        bias     = rand_f(4);
        for (int i = 0; i < TN; i++) begin feat[i] = rand_f(4); wgt[i] = rand_f(4); end
        for (int i = 0; i < NP; i++) lanes[i] = (i < TN && lane_en[i]) ? fmul(feat[i], wgt[i]) : 32'd0;
        v_h[k]   = valid_in;
        sum_h[k] = tree_sum(lanes, NP);
        acc_h[k] = rand_f(6);
        ub_h[k]  = use_bias;
        if (use_bias) exp_h[k] = fadd(sum_h[k], bias);
      end else valid_in = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic ub_h [H];
  function automatic logic use_bias_h(int i);
    return ub_h[i];
  endfunction
endmodule
