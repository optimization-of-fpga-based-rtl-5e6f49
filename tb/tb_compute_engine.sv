// tb_compute_engine: checks a compute engine of TM = 3 tiles of TN = 4 lanes
// against the reference FP32 model. All tiles share the input features and
// have their own weights, bias and running sum; each result must appear
// exactly LV+2 = 4 cycles after issue, for every tile.
module tb_compute_engine;
  import clp_pkg::*;
  import fp_ref_pkg::*;
  import conv_ref_pkg::*;

  localparam int TN = 4, TM = 3, LV = 2, NP = 4, OPS = 2000, H = OPS + 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic valid_in = 0, use_bias = 0, valid_out;
  word_t feat [TN], wgt [TM][TN], bias [TM], acc_in [TM], acc_out [TM];
  logic [TN-1:0] lane_en = '0;

  compute_engine #(.TN(TN), .TM(TM)) dut (.clk, .rst_n, .valid_in, .feat, .wgt, .lane_en,
                                          .bias, .use_bias, .acc_in, .valid_out, .acc_out);

  int checks = 0, failures = 0;
  logic  v_h [H];
  logic  ub_h [H];
  word_t exp_h [H][TM];
  word_t sum_h [H][TM];
  word_t acc_h [H][TM];

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lanes_t lanes;
    for (int i = 0; i < TN; i++) feat[i] = '0;
    for (int m = 0; m < TM; m++) begin
      bias[m] = '0; acc_in[m] = '0;
      for (int i = 0; i < TN; i++) wgt[m][i] = '0;
    end
    for (int i = 0; i < H; i++) begin v_h[i] = 0; ub_h[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < OPS + LV + 3; k++) begin
      @(negedge clk);
      if (k >= LV + 2) begin
        checks++;
        if (valid_out !== v_h[k-LV-2]) begin
          failures++;
          $display("FAIL cycle %0d valid_out=%b expected %b", k, valid_out, v_h[k-LV-2]);
        end
        if (v_h[k-LV-2])
          for (int m = 0; m < TM; m++) begin
            checks++;
            if (acc_out[m] !== exp_h[k-LV-2][m]) begin
              failures++;
              if (failures < 10) $display("FAIL op %0d tile %0d = %h expected %h", k-LV-2, m,
                                          acc_out[m], exp_h[k-LV-2][m]);
            end
          end
      end
      if (k >= LV + 1)
        for (int m = 0; m < TM; m++) begin
          acc_in[m] = acc_h[k-LV-1][m];
          if (!ub_h[k-LV-1]) exp_h[k-LV-1][m] = fadd(sum_h[k-LV-1][m], acc_in[m]);
        end
      if (k < OPS) begin
        valid_in = ($urandom_range(4) != 0);
        lane_en  = TN'($urandom);
        use_bias = ($urandom_range(3) == 0);
        for (int i = 0; i < TN; i++) feat[i] = rand_f(4);
        v_h[k]  = valid_in;
        ub_h[k] = use_bias;
        for (int m = 0; m < TM; m++) begin
          bias[m] = rand_f(4);
          for (int i = 0; i < TN; i++) wgt[m][i] = rand_f(4);
          for (int i = 0; i < NP; i++) lanes[i] = lane_en[i] ? fmul(feat[i], wgt[m][i]) : 32'd0;
          sum_h[k][m] = tree_sum(lanes, NP);
          acc_h[k][m] = rand_f(6);
          if (use_bias) exp_h[k][m] = fadd(sum_h[k][m], bias[m]);
        end
      end else valid_in = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
