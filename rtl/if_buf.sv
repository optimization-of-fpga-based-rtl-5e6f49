// if_buf: input feature buffer (IF_BUF) of one CLP.
//
// TN banks, one per input feature map lane of the compute engine. Each bank is
// a simple dual-port RAM of 2*DEPTH words holding two ping-pong sets: set s
// occupies words [s*DEPTH, s*DEPTH+DEPTH). The loader writes one word per
// cycle into the set the engine is not using; the engine reads the same
// address of all TN banks every cycle, with one cycle of read latency. The
// bank count and the ping-pong organisation follow the paper; DEPTH (the
// largest IF tile footprint (K+S(Tr-1))*(K+S(Tc-1)) of the layers mapped to
// the CLP) is set by the parameters of the chosen tiling.
module if_buf
  import clp_pkg::*;
#(
  parameter int unsigned TN    = 3,
  parameter int unsigned DEPTH = 1521,
  localparam int unsigned LAW = $clog2(DEPTH),
  localparam int unsigned PAW = $clog2(2 * DEPTH)
) (
  input  logic                  clk,
  // loader side
  input  logic                  wr_en,
  input  logic [$clog2(TN+1)-1:0] wr_bank,
  input  logic                  wr_set,
  input  logic [LAW-1:0]        wr_addr,
  input  word_t                 wr_data,
  // engine side
  input  logic                  rd_set,
  input  logic [LAW-1:0]        rd_addr,
  output word_t                 rd_data [TN]
);
  logic [PAW-1:0] wa, ra;
  assign wa = wr_set ? PAW'(wr_addr) + PAW'(DEPTH) : PAW'(wr_addr);
  assign ra = rd_set ? PAW'(rd_addr) + PAW'(DEPTH) : PAW'(rd_addr);

  for (genvar b = 0; b < TN; b++) begin : g_bank
    sdp_ram #(.DW(DW), .DEPTH(2 * DEPTH)) u_ram (
      .clk, .we(wr_en && wr_bank == b), .waddr(wa), .wdata(wr_data),
      .raddr(ra), .rdata(rd_data[b]));
  end
endmodule
