// w_buf: weight buffer (W_BUF) of one CLP, with the per-tile bias registers.
//
// TN*TM banks: bank mt*TN+nt feeds multiplier nt of MAC tree tile mt, as every
// multiplier needs its own weight each cycle. Each bank is a simple dual-port
// RAM of 2*DEPTH words holding two ping-pong sets (DEPTH = K*K of the largest
// kernel mapped to the CLP). The loader writes one word per cycle into the idle
// set; the engine reads one address in all banks of its set, data one cycle
// later. Next to the weights each set holds TM bias words: the paper
// broadcasts the biases into OF_BUF before the first input-map tile, and this
// design instead feeds them to the accumulators on that tile's first pass.
// The bias words are read with the same one-cycle latency as the weights.
module w_buf
  import clp_pkg::*;
#(
  parameter int unsigned TN    = 3,
  parameter int unsigned TM    = 24,
  parameter int unsigned DEPTH = 121,
  localparam int unsigned LAW = $clog2(DEPTH),
  localparam int unsigned PAW = $clog2(2 * DEPTH),
  localparam int unsigned BW  = $clog2(TN * TM + 1)
) (
  input  logic           clk,
  // loader side
  input  logic           wr_en,
  input  logic [BW-1:0]  wr_bank,
  input  logic           wr_set,
  input  logic [LAW-1:0] wr_addr,
  input  word_t          wr_data,
  input  logic           b_wr_en,
  input  logic [$clog2(TM+1)-1:0] b_wr_mt,
  // engine side
  input  logic           rd_set,
  input  logic [LAW-1:0] rd_addr,
  output word_t          rd_data [TM][TN],
  output word_t          rd_bias [TM]
);
  logic [PAW-1:0] wa, ra;
  word_t bias_q [2][TM];

  assign wa = wr_set ? PAW'(wr_addr) + PAW'(DEPTH) : PAW'(wr_addr);
  assign ra = rd_set ? PAW'(rd_addr) + PAW'(DEPTH) : PAW'(rd_addr);

  for (genvar mt = 0; mt < TM; mt++) begin : g_tile
    for (genvar nt = 0; nt < TN; nt++) begin : g_lane
      sdp_ram #(.DW(DW), .DEPTH(2 * DEPTH)) u_ram (
        .clk, .we(wr_en && wr_bank == BW'(mt * TN + nt)), .waddr(wa), .wdata(wr_data),
        .raddr(ra), .rdata(rd_data[mt][nt]));
    end
    always_ff @(posedge clk) begin
      if (b_wr_en && b_wr_mt == mt) bias_q[wr_set][mt] <= wr_data;
      rd_bias[mt] <= bias_q[rd_set][mt];
    end
  end
endmodule
