// mem_arbiter: shares the single off-chip memory port among the G CLPs.
//
// Reads: round-robin among the CLPs that request, one request per cycle; the
// request leaves with the winner's id, and the memory returns that id with
// the response, which is steered back to that CLP only. Writes: a separate
// round-robin among the CLPs' write ports. The pointer moves past a CLP after
// it was served, so no CLP waits for more than G-1 others. The paper has all
// CLPs share the board's one DDR3 memory but does not describe the
// arbitration; this scheme is this design's choice.
module mem_arbiter
  import clp_pkg::*;
#(
  parameter int unsigned G = 4,
  localparam int unsigned IW = (G > 1) ? $clog2(G) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // CLP side
  input  logic [G-1:0]  rd_req_valid,
  output logic [G-1:0]  rd_req_ready,
  input  addr_t         rd_req_addr [G],
  output logic [G-1:0]  rd_rsp_valid,
  output word_t         rd_rsp_data,
  input  logic [G-1:0]  wr_valid,
  output logic [G-1:0]  wr_ready,
  input  addr_t         wr_addr [G],
  input  word_t         wr_data [G],
  // memory side
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
  output word_t         m_wr_data
);
  logic [IW-1:0] rd_ptr, wr_ptr, rd_gnt, wr_gnt;
  logic          rd_any, wr_any;

  // First requester at or after the pointer.
  function automatic logic [IW-1:0] pick(logic [G-1:0] req, logic [IW-1:0] ptr, output logic any);
    any = 1'b0;
    pick = '0;
    for (int k = G - 1; k >= 0; k--) begin
      logic [IW-1:0] idx;
      idx = IW'((int'(ptr) + k) % G);
      if (req[idx]) begin
        pick = idx;
        any  = 1'b1;
      end
    end
  endfunction

  always_comb begin
    rd_gnt = pick(rd_req_valid, rd_ptr, rd_any);
    wr_gnt = pick(wr_valid, wr_ptr, wr_any);

    m_rd_req_valid = rd_any;
    m_rd_req_addr  = rd_req_addr[rd_gnt];
    m_rd_req_id    = GW'(rd_gnt);
    rd_req_ready   = '0;
    rd_req_ready[rd_gnt] = rd_any && m_rd_req_ready;

    m_wr_valid = wr_any;
    m_wr_addr  = wr_addr[wr_gnt];
    m_wr_data  = wr_data[wr_gnt];
    wr_ready   = '0;
    wr_ready[wr_gnt] = wr_any && m_wr_ready;

    rd_rsp_data  = m_rd_rsp_data;
    rd_rsp_valid = '0;
    if (32'(m_rd_rsp_id) < G) rd_rsp_valid[IW'(m_rd_rsp_id)] = m_rd_rsp_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
    end else begin
      if (m_rd_req_valid && m_rd_req_ready) rd_ptr <= IW'((int'(rd_gnt) + 1) % G);
      if (m_wr_valid && m_wr_ready)         wr_ptr <= IW'((int'(wr_gnt) + 1) % G);
    end
  end

  a_one_read_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(rd_req_ready));
  a_one_write_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(wr_ready));
endmodule
