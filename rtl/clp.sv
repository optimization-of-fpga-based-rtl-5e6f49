// clp: one convolutional layer processor (CLP) of the Multi-CLP accelerator.
//
// A CLP computes the CONV layers listed in its layer table, one after another,
// with loop tiling (Tr x Tc output pixels, TM output maps, TN input maps per
// tile), unrolling of the TM x TN innermost loops in the compute engine, and
// double buffering of all three on-chip buffers so that off-chip transfers
// overlap computation:
//
//   off-chip read port -> clp_loader -> IF_BUF (TN banks), W_BUF (TN*TM banks)
//   IF_BUF, W_BUF, OF_BUF -> compute_engine (TM MAC tree tiles) -> OF_BUF
//   OF_BUF (TM banks) -> clp_writer -> off-chip write port
//
// clp_controller sequences it all (see there for the timing). The host writes
// layer descriptors through cfg_*, pulses start, and waits for done. Buffer
// depths per set: IF_DEPTH >= (K+S(Tr-1))*(K+S(Tc-1)), W_DEPTH >= K*K and
// OF_DEPTH >= Tr*Tc for every layer in the table. The structure follows the
// paper; the ports, the depths and the bias handling are this design's.
module clp
  import clp_pkg::*;
#(
  parameter int unsigned TN         = 3,
  parameter int unsigned TM         = 24,
  parameter int unsigned MAX_LAYERS = 3,
  parameter int unsigned IF_DEPTH   = 1521,
  parameter int unsigned W_DEPTH    = 121,
  parameter int unsigned OF_DEPTH   = 169,
  localparam int unsigned IW = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1,
  localparam int unsigned NW = $clog2(MAX_LAYERS + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  // host configuration
  input  logic        cfg_we,
  input  logic [IW-1:0] cfg_idx,
  input  layer_desc_t cfg_desc,
  input  logic        cfg_num_we,
  input  logic [NW-1:0] cfg_num,
  input  logic        start,
  output logic        busy,
  output logic        done,
  // off-chip memory
  output logic        rd_req_valid,
  input  logic        rd_req_ready,
  output addr_t       rd_req_addr,
  input  logic        rd_rsp_valid,
  input  word_t       rd_rsp_data,
  output logic        wr_valid,
  input  logic        wr_ready,
  output addr_t       wr_addr,
  output word_t       wr_data,
  // performance counters of the last run
  output logic [31:0] cnt_issue,
  output logic [31:0] cnt_stall_in,
  output logic [31:0] cnt_stall_of,
  output logic [31:0] cnt_pad
);
  localparam int unsigned IFAW = $clog2(IF_DEPTH);
  localparam int unsigned WAW  = $clog2(W_DEPTH);
  localparam int unsigned OFAW = $clog2(OF_DEPTH);

  layer_desc_t tbl_desc;
  logic [IW-1:0] tbl_idx;
  logic [NW-1:0] num_layers;

  logic  ld_start, ld_set, ld_done, ld_busy;
  tile_t ld_tile;
  logic  wr_start, wr_set, wr_done, wr_busy;
  tile_t wr_tile;

  logic            buf_set;
  word_t           buf_data;
  logic            if_we, w_we, b_we;
  logic [$clog2(TN+1)-1:0]    if_bank;
  logic [$clog2(TN*TM+1)-1:0] w_bank;
  logic [$clog2(TM+1)-1:0]    b_mt;
  logic [IFAW-1:0] if_waddr, if_rd_addr;
  logic [WAW-1:0]  w_waddr, w_rd_addr;

  logic            cp_set, of_set;
  logic            eng_valid, eng_use_bias, eng_valid_out;
  logic [TN-1:0]   eng_lane_en;
  logic [OFAW-1:0] of_rd_addr, of_wr_addr, dr_addr;
  logic [TM-1:0]   of_wr_en;
  logic            dr_en;

  word_t feat [TN];
  word_t wgt  [TM][TN];
  word_t bias [TM];
  word_t of_old [TM];
  word_t of_new [TM];
  word_t dr_data [TM];

  layer_table #(.MAX_LAYERS(MAX_LAYERS)) u_table (
    .clk, .rst_n, .wr_en(cfg_we), .wr_idx(cfg_idx), .wr_desc(cfg_desc),
    .num_wr_en(cfg_num_we), .num_wr(cfg_num), .rd_idx(tbl_idx), .rd_desc(tbl_desc),
    .num_layers);

  clp_controller #(.TN(TN), .TM(TM), .MAX_LAYERS(MAX_LAYERS),
                   .IF_DEPTH(IF_DEPTH), .W_DEPTH(W_DEPTH), .OF_DEPTH(OF_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .tbl_idx, .tbl_desc, .num_layers,
    .ld_start, .ld_tile, .ld_set, .ld_done,
    .wr_start, .wr_tile, .wr_set, .wr_done,
    .cp_set, .if_rd_addr, .w_rd_addr, .eng_valid, .eng_lane_en, .eng_use_bias,
    .of_set, .of_rd_addr, .of_wr_en, .of_wr_addr,
    .cnt_issue, .cnt_stall_in, .cnt_stall_of, .cnt_pad);

  clp_loader #(.TN(TN), .TM(TM), .IF_DEPTH(IF_DEPTH), .W_DEPTH(W_DEPTH)) u_loader (
    .clk, .rst_n, .start(ld_start), .tile(ld_tile), .set(ld_set), .busy(ld_busy), .done(ld_done),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .buf_set, .buf_data, .if_we, .if_bank, .if_addr(if_waddr),
    .w_we, .w_bank, .w_addr(w_waddr), .b_we, .b_mt);

  if_buf #(.TN(TN), .DEPTH(IF_DEPTH)) u_if_buf (
    .clk, .wr_en(if_we), .wr_bank(if_bank), .wr_set(buf_set), .wr_addr(if_waddr),
    .wr_data(buf_data), .rd_set(cp_set), .rd_addr(if_rd_addr), .rd_data(feat));

  w_buf #(.TN(TN), .TM(TM), .DEPTH(W_DEPTH)) u_w_buf (
    .clk, .wr_en(w_we), .wr_bank(w_bank), .wr_set(buf_set), .wr_addr(w_waddr),
    .wr_data(buf_data), .b_wr_en(b_we), .b_wr_mt(b_mt),
    .rd_set(cp_set), .rd_addr(w_rd_addr), .rd_data(wgt), .rd_bias(bias));

  compute_engine #(.TN(TN), .TM(TM)) u_engine (
    .clk, .rst_n, .valid_in(eng_valid), .feat, .wgt, .lane_en(eng_lane_en),
    .bias, .use_bias(eng_use_bias), .acc_in(of_old),
    .valid_out(eng_valid_out), .acc_out(of_new));

  of_buf #(.TM(TM), .DEPTH(OF_DEPTH)) u_of_buf (
    .clk, .acc_set(of_set), .acc_rd_addr(of_rd_addr), .acc_rd_data(of_old),
    .acc_wr_set(of_set), .acc_wr_en(of_wr_en), .acc_wr_addr(of_wr_addr), .acc_wr_data(of_new),
    .dr_en, .dr_set(wr_set), .dr_addr, .dr_data);

  clp_writer #(.TM(TM), .OF_DEPTH(OF_DEPTH)) u_writer (
    .clk, .rst_n, .start(wr_start), .tile(wr_tile), .busy(wr_busy), .done(wr_done),
    .dr_en, .dr_addr, .dr_data, .wr_valid, .wr_ready, .wr_addr, .wr_data);

  // The controller's OF write strobe and the engine's result must coincide.
  a_eng_align: assert property (@(posedge clk) disable iff (!rst_n) (|of_wr_en) |-> eng_valid_out);

  // The controller only starts the loader and the writer when they are idle.
  a_ld_idle: assert property (@(posedge clk) disable iff (!rst_n) ld_start |-> !ld_busy);
  a_wr_idle: assert property (@(posedge clk) disable iff (!rst_n) wr_start |-> !wr_busy);
endmodule
