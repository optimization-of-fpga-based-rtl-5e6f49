// layer_table: the list of CONV layers assigned to one CLP.
//
// Up to MAX_LAYERS layer descriptors (shape, tiling factors Tr/Tc and the
// off-chip base addresses of IF, W, B and OF) plus the number of layers in
// use. The host writes entries through a simple register write port before an
// episode; the CLP controller reads entry rd_idx combinationally and processes
// the layers in table order, one after another. The paper fixes the set of
// layers per CLP at design time; keeping their shapes in a writable table lets
// the same hardware run the host's choice of layers and addresses.
module layer_table
  import clp_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = 3,
  localparam int unsigned IW = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1,
  localparam int unsigned NW = $clog2(MAX_LAYERS + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [IW-1:0] wr_idx,
  input  layer_desc_t wr_desc,
  input  logic        num_wr_en,
  input  logic [NW-1:0] num_wr,
  input  logic [IW-1:0] rd_idx,
  output layer_desc_t rd_desc,
  output logic [NW-1:0] num_layers
);
  layer_desc_t tbl [MAX_LAYERS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num_layers <= '0;
      for (int i = 0; i < MAX_LAYERS; i++) tbl[i] <= '0;
    end else begin
      if (wr_en && 32'(wr_idx) < MAX_LAYERS) tbl[wr_idx] <= wr_desc;
      if (num_wr_en) num_layers <= (32'(num_wr) > MAX_LAYERS) ? NW'(MAX_LAYERS) : num_wr;
    end
  end

  assign rd_desc = (32'(rd_idx) < MAX_LAYERS) ? tbl[rd_idx] : '0;
endmodule
