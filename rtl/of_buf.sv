// of_buf: output feature buffer (OF_BUF) of one CLP.
//
// TM banks, one per MAC tree tile, each made of two arrays of DEPTH words, one
// per ping-pong set (DEPTH = largest Tr*Tc of the layers mapped to the CLP).
// The accumulate side reads the old partial sum of every bank at acc_rd_addr
// (data one cycle later) and writes the new sums back later at acc_wr_addr;
// the write-first RAMs return a word written in the same cycle it is read.
// The drain side reads set dr_set at dr_addr, while dr_en, for the transfer
// to off-chip memory; the controller never drains the set being accumulated. The paper builds each bank from true dual-port RAM in write-first
// mode; splitting the two sets into two simple dual-port arrays gives every
// set the same two ports (one accumulator read/write pair, or the drain read).
module of_buf
  import clp_pkg::*;
#(
  parameter int unsigned TM    = 24,
  parameter int unsigned DEPTH = 169,
  localparam int unsigned LAW = $clog2(DEPTH)
) (
  input  logic           clk,
  // accumulate side
  input  logic           acc_set,
  input  logic [LAW-1:0] acc_rd_addr,
  output word_t          acc_rd_data [TM],
  input  logic           acc_wr_set,
  input  logic [TM-1:0]  acc_wr_en,
  input  logic [LAW-1:0] acc_wr_addr,
  input  word_t          acc_wr_data [TM],
  // drain side: while dr_en, set dr_set is read at dr_addr
  input  logic           dr_en,
  input  logic           dr_set,
  input  logic [LAW-1:0] dr_addr,
  output word_t          dr_data [TM]
);
  logic  acc_set_q, dr_set_q;
  word_t rdata [TM][2];

  always_ff @(posedge clk) begin
    acc_set_q <= acc_set;
    dr_set_q  <= dr_set;
  end

  for (genvar b = 0; b < TM; b++) begin : g_bank
    for (genvar s = 0; s < 2; s++) begin : g_set
      sdp_ram #(.DW(DW), .DEPTH(DEPTH)) u_ram (
        .clk,
        .we(acc_wr_en[b] && acc_wr_set == s), .waddr(acc_wr_addr), .wdata(acc_wr_data[b]),
        .raddr((dr_en && dr_set == s) ? dr_addr : acc_rd_addr), .rdata(rdata[b][s]));
    end
    assign acc_rd_data[b] = rdata[b][acc_set_q];
    assign dr_data[b]     = rdata[b][dr_set_q];
  end
endmodule
