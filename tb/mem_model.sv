// mem_model: behavioural model of the off-chip memory for the testbenches.
//
// A word array with one read-request port (valid/ready, tagged with the id of
// the requester), in-order read responses after LAT cycles, and one write
// port (valid/ready). When RANDOM_READY is set, both ready signals drop at
// random, which exercises the back-pressure paths of the design. Not
// synthesizable: a stand-in for the DDR3 memory of the board.
module mem_model #(
  parameter int unsigned WORDS        = 65536,
  parameter int unsigned LAT          = 4,
  parameter bit          RANDOM_READY = 1'b1
) (
  input  logic        clk,
  input  logic        rd_req_valid,
  output logic        rd_req_ready,
  input  logic [31:0] rd_req_addr,
  input  logic [3:0]  rd_req_id,
  output logic        rd_rsp_valid,
  output logic [31:0] rd_rsp_data,
  output logic [3:0]  rd_rsp_id,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [31:0] wr_addr,
  input  logic [31:0] wr_data
);
  logic [31:0] mem [WORDS];
  logic        pv [LAT];
  logic [31:0] pd [LAT];
  logic [3:0]  pi [LAT];
  int          n_reads = 0, n_writes = 0;

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = 32'd0;
    for (int i = 0; i < LAT; i++) pv[i] = 1'b0;
    rd_req_ready = 1'b0;
    wr_ready     = 1'b0;
  end

  always @(posedge clk) begin
    pv[0] <= rd_req_valid && rd_req_ready;
    pd[0] <= mem[rd_req_addr % WORDS];
    pi[0] <= rd_req_id;
    for (int i = 1; i < LAT; i++) begin
      pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; pi[i] <= pi[i-1];
    end
    if (rd_req_valid && rd_req_ready) n_reads++;
    if (wr_valid && wr_ready) begin
      mem[wr_addr % WORDS] <= wr_data;
      n_writes++;
    end
    rd_req_ready <= RANDOM_READY ? ($urandom_range(7) != 0) : 1'b1;
    wr_ready     <= RANDOM_READY ? ($urandom_range(3) != 0) : 1'b1;
  end

  assign rd_rsp_valid = pv[LAT-1];
  assign rd_rsp_data  = pd[LAT-1];
  assign rd_rsp_id    = pi[LAT-1];
endmodule
