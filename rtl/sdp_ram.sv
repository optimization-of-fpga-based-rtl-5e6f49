// sdp_ram: simple dual-port RAM, one write port and one synchronous read port,
// the behaviour of a block RAM in simple dual-port mode.
//
// Read data appears one clock after the read address. A read and a write to
// the same address in the same cycle return the new data (write-first), which
// the output buffer relies on when an accumulation reads a word in the cycle
// its previous update is written. Contents are not reset.
module sdp_ram #(
  parameter int unsigned DW    = 32,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (we && waddr == raddr) rdata <= wdata;
    else                      rdata <= mem[raddr];
  end
endmodule
