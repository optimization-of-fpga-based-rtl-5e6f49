// tb_layer_table: checks the per-CLP layer table (MAX_LAYERS = 3): reset
// clears it, descriptors written to an entry read back unchanged on the
// same cycle's combinational read port, and a layer count above MAX_LAYERS
// is clamped.
module tb_layer_table;
  import clp_pkg::*;
  localparam int ML = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic wr_en = 0, num_wr_en = 0;
  logic [1:0] wr_idx = '0, rd_idx = '0, num_wr = '0, num_layers;
  layer_desc_t wr_desc = '0, rd_desc;
  layer_desc_t shadow [ML];

  layer_table #(.MAX_LAYERS(ML)) dut (.clk, .rst_n, .wr_en, .wr_idx, .wr_desc, .num_wr_en,
                                      .num_wr, .rd_idx, .rd_desc, .num_layers);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic layer_desc_t rand_desc();
    layer_desc_t d;
    d.n = 16'($urandom); d.m = 16'($urandom); d.r = 16'($urandom); d.c = 16'($urandom);
    d.k = 16'($urandom); d.s = 16'($urandom); d.tr = 16'($urandom); d.tc = 16'($urandom);
    d.if_base = $urandom; d.w_base = $urandom; d.b_base = $urandom; d.of_base = $urandom;
    return d;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < ML; i++) begin
      rd_idx = 2'(i);
      #1;
      checks++;
      if (rd_desc !== '0) begin failures++; $display("FAIL entry %0d not cleared", i); end
      shadow[i] = '0;
    end
    checks++;
    if (num_layers !== 0) begin failures++; $display("FAIL count not cleared"); end
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      wr_en = $urandom_range(1);
      wr_idx = 2'($urandom_range(ML - 1));
      wr_desc = rand_desc();
      if (wr_en) shadow[wr_idx] = wr_desc;
      @(negedge clk);
      wr_en = 0;
      rd_idx = 2'($urandom_range(ML - 1));
      #1;
      checks++;
      if (rd_desc !== shadow[rd_idx]) begin
        failures++;
        $display("FAIL entry %0d mismatch", rd_idx);
      end
    end
    for (int v = 0; v < 4; v++) begin
      @(negedge clk);
      num_wr_en = 1; num_wr = 2'(v);
      @(negedge clk);
      num_wr_en = 0;
      checks++;
      if (num_layers !== 2'((v > ML) ? ML : v)) begin
        failures++;
        $display("FAIL count %0d written, %0d read", v, num_layers);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
