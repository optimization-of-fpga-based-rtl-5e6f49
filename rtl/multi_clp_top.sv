// multi_clp_top: the Multi-CLP CNN accelerator.
//
// G convolutional layer processors of different sizes share one off-chip
// memory port. Each CLP owns a fixed subset of the network's CONV layers and
// runs them back to back in every episode; an episode ends when all CLPs are
// done. With the default parameters this is the simulated-annealing result
// for AlexNet on a Virtex-7 VX485T with FP32 data:
//   CLP0 <Tn,Tm> = <3,24>   layers 1a, 4a
//   CLP1 <Tn,Tm> = <3,24>   layers 1b, 4b
//   CLP2 <Tn,Tm> = <16,11>  layers 2a, 2b, 5a
//   CLP3 <Tn,Tm> = <16,8>   layers 3a, 3b, 5b
// i.e. 448 FP32 multiply-accumulators. The unrolling factors and the layer
// mapping follow the paper; the buffer depths (per ping-pong set) follow from
// tiling factors chosen by this design, Tr = Tc = 8 for layer 1, 27 for
// layer 2 and 13 for layers 3 to 5, and must cover every layer written into a
// CLP's table.
//
// Interface: the host writes layer descriptors per CLP (cfg_clp selects the
// CLP, cfg_idx the entry) and the layer count, then pulses start; done pulses
// at the end of the episode. The memory port carries a CLP id with each read
// request, which the memory returns with the data (any latency, in order).
module multi_clp_top
  import clp_pkg::*;
#(
  parameter int unsigned G = 4,
  parameter int unsigned MAX_LAYERS = 3,
  parameter int unsigned TN [G]       = '{3, 3, 16, 16},
  parameter int unsigned TM [G]       = '{24, 24, 11, 8},
  parameter int unsigned IF_DEPTH [G] = '{1521, 1521, 961, 225},
  parameter int unsigned W_DEPTH [G]  = '{121, 121, 25, 9},
  parameter int unsigned OF_DEPTH [G] = '{169, 169, 729, 169},
  localparam int unsigned IW = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1,
  localparam int unsigned NW = $clog2(MAX_LAYERS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // host configuration and control
  input  logic          cfg_we,
  input  logic [GW-1:0] cfg_clp,
  input  logic [IW-1:0] cfg_idx,
  input  layer_desc_t   cfg_desc,
  input  logic          cfg_num_we,
  input  logic [NW-1:0] cfg_num,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [31:0]   episodes,
  output logic [31:0]   ep_cycles,
  // off-chip memory
  output logic          m_rd_req_valid,
  input  logic          m_rd_req_ready,
  output addr_t         m_rd_req_addr,
  output logic [GW-1:0] m_rd_req_id,
  input  logic          m_rd_rsp_valid,
  input  word_t         m_rd_rsp_data,
  input  logic [GW-1:0] m_rd_rsp_id,
  output logic          m_wr_valid,
  input  logic          m_wr_ready,
  output addr_t         m_wr_addr,
  output word_t         m_wr_data,
  // per-CLP counters of the last episode
  output logic [31:0]   cnt_issue    [G],
  output logic [31:0]   cnt_stall_in [G],
  output logic [31:0]   cnt_stall_of [G],
  output logic [31:0]   cnt_pad      [G]
);
  logic [G-1:0] clp_start, clp_done, clp_busy;
  logic [G-1:0] rd_req_valid, rd_req_ready, rd_rsp_valid, wr_valid, wr_ready;
  addr_t        rd_req_addr [G];
  addr_t        wr_addr [G];
  word_t        wr_data [G];
  word_t        rd_rsp_data;

  episode_ctrl #(.G(G)) u_episode (
    .clk, .rst_n, .start, .busy, .done, .clp_start, .clp_done, .episodes, .ep_cycles);

  for (genvar g = 0; g < G; g++) begin : g_clp
    clp #(.TN(TN[g]), .TM(TM[g]), .MAX_LAYERS(MAX_LAYERS),
          .IF_DEPTH(IF_DEPTH[g]), .W_DEPTH(W_DEPTH[g]), .OF_DEPTH(OF_DEPTH[g])) u_clp (
      .clk, .rst_n,
      .cfg_we(cfg_we && cfg_clp == GW'(g)), .cfg_idx, .cfg_desc,
      .cfg_num_we(cfg_num_we && cfg_clp == GW'(g)), .cfg_num,
      .start(clp_start[g]), .busy(clp_busy[g]), .done(clp_done[g]),
      .rd_req_valid(rd_req_valid[g]), .rd_req_ready(rd_req_ready[g]), .rd_req_addr(rd_req_addr[g]),
      .rd_rsp_valid(rd_rsp_valid[g]), .rd_rsp_data,
      .wr_valid(wr_valid[g]), .wr_ready(wr_ready[g]), .wr_addr(wr_addr[g]), .wr_data(wr_data[g]),
      .cnt_issue(cnt_issue[g]), .cnt_stall_in(cnt_stall_in[g]),
      .cnt_stall_of(cnt_stall_of[g]), .cnt_pad(cnt_pad[g]));
  end

  mem_arbiter #(.G(G)) u_arb (
    .clk, .rst_n,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .m_rd_req_valid, .m_rd_req_ready, .m_rd_req_addr, .m_rd_req_id,
    .m_rd_rsp_valid, .m_rd_rsp_data, .m_rd_rsp_id,
    .m_wr_valid, .m_wr_ready, .m_wr_addr, .m_wr_data);

  // A CLP only starts an episode when it is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) (|(clp_start & clp_busy)) == 1'b0);
endmodule
