// clp_loader: fills one ping-pong set of IF_BUF and W_BUF from off-chip memory.
//
// On start it copies the tile described by `tile` into buffer set `set`:
//   1. the input window of every input map of the tile, TN banks,
//      word (x, y) of map nt to IF_BUF bank nt, address x*ITW + y, where
//      ITW = K + S*(Tc-1) is the widest window of the layer;
//   2. the K x K kernels of every (output map, input map) pair of the tile,
//      kernel (mt, nt) to W_BUF bank mt*TN + nt, address i*K + j;
//   3. on the first input-map tile of an output tile only, the TM biases.
// Reads are issued one per cycle on a valid/ready request port; responses
// return in order, one word per beat, with any latency and no backpressure.
// A second walker over the same sequence places each response. `done` pulses
// when the last word is in the buffer. This is the data-transfer stage of the
// tiled convolution in the paper; the memory layout and the port protocol are
// this design's choice (see clp_pkg for the address formulas).
module clp_loader
  import clp_pkg::*;
#(
  parameter int unsigned TN     = 3,
  parameter int unsigned TM     = 24,
  parameter int unsigned IF_DEPTH = 1521,
  parameter int unsigned W_DEPTH  = 121,
  localparam int unsigned IFAW = $clog2(IF_DEPTH),
  localparam int unsigned WAW  = $clog2(W_DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  tile_t       tile,
  input  logic        set,
  output logic        busy,
  output logic        done,
  // off-chip read port
  output logic        rd_req_valid,
  input  logic        rd_req_ready,
  output addr_t       rd_req_addr,
  input  logic        rd_rsp_valid,
  input  word_t       rd_rsp_data,
  // buffer write side
  output logic        buf_set,
  output word_t       buf_data,
  output logic        if_we,
  output logic [$clog2(TN+1)-1:0] if_bank,
  output logic [IFAW-1:0] if_addr,
  output logic        w_we,
  output logic [$clog2(TN*TM+1)-1:0] w_bank,
  output logic [WAW-1:0] w_addr,
  output logic        b_we,
  output logic [$clog2(TM+1)-1:0] b_mt
);
  typedef enum logic [1:0] {PH_IF, PH_W, PH_B, PH_END} phase_e;
  typedef struct packed {
    phase_e ph;
    cnt_t   p0, p1, p2, p3;
  } pos_t;

  tile_t t_q;
  pos_t  req_pos, rsp_pos;
  logic  set_q;

  function automatic pos_t first_pos();
    return '{ph: PH_IF, p0: '0, p1: '0, p2: '0, p3: '0};
  endfunction

  function automatic pos_t next_pos(pos_t p, tile_t t);
    pos_t q = p;
    case (p.ph)
      PH_IF: begin  // p0 = nt, p1 = x, p2 = y
        if (p.p2 + 1'b1 < in_span(t.tc_ext, t.l.k, t.l.s)) q.p2 = p.p2 + 1'b1;
        else begin
          q.p2 = '0;
          if (p.p1 + 1'b1 < in_span(t.tr_ext, t.l.k, t.l.s)) q.p1 = p.p1 + 1'b1;
          else begin
            q.p1 = '0;
            if (p.p0 + 1'b1 < t.n_ext) q.p0 = p.p0 + 1'b1;
            else begin q.p0 = '0; q.ph = PH_W; end
          end
        end
      end
      PH_W: begin   // p0 = mt, p1 = nt, p2 = i, p3 = j
        if (p.p3 + 1'b1 < t.l.k) q.p3 = p.p3 + 1'b1;
        else begin
          q.p3 = '0;
          if (p.p2 + 1'b1 < t.l.k) q.p2 = p.p2 + 1'b1;
          else begin
            q.p2 = '0;
            if (p.p1 + 1'b1 < t.n_ext) q.p1 = p.p1 + 1'b1;
            else begin
              q.p1 = '0;
              if (p.p0 + 1'b1 < t.m_ext) q.p0 = p.p0 + 1'b1;
              else begin q.p0 = '0; q.ph = t.first_n ? PH_B : PH_END; end
            end
          end
        end
      end
      PH_B: begin   // p0 = mt
        if (p.p0 + 1'b1 < t.m_ext) q.p0 = p.p0 + 1'b1;
        else q.ph = PH_END;
      end
      default: q = p;
    endcase
    return q;
  endfunction

  function automatic addr_t mem_addr(pos_t p, tile_t t);
    addr_t ih, iw;
    ih = addr_t'(in_span(t.l.r, t.l.k, t.l.s));
    iw = addr_t'(in_span(t.l.c, t.l.k, t.l.s));
    case (p.ph)
      PH_IF: return t.l.if_base
                    + ((addr_t'(t.n0) + addr_t'(p.p0)) * ih + addr_t'(t.l.s) * t.r0 + addr_t'(p.p1)) * iw
                    + addr_t'(t.l.s) * t.c0 + addr_t'(p.p2);
      PH_W:  return t.l.w_base
                    + (((addr_t'(t.m0) + addr_t'(p.p0)) * t.l.n + addr_t'(t.n0) + addr_t'(p.p1)) * t.l.k + addr_t'(p.p2))
                      * t.l.k + addr_t'(p.p3);
      PH_B:  return t.l.b_base + addr_t'(t.m0) + addr_t'(p.p0);
      default: return '0;
    endcase
  endfunction

  assign busy         = (req_pos.ph != PH_END) || (rsp_pos.ph != PH_END);
  assign rd_req_valid = (req_pos.ph != PH_END);
  assign rd_req_addr  = mem_addr(req_pos, t_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_pos <= '{ph: PH_END, default: '0};
      rsp_pos <= '{ph: PH_END, default: '0};
      t_q     <= '0;
      set_q   <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        t_q     <= tile;
        set_q   <= set;
        req_pos <= first_pos();
        rsp_pos <= first_pos();
      end else begin
        if (rd_req_valid && rd_req_ready) req_pos <= next_pos(req_pos, t_q);
        if (rd_rsp_valid && rsp_pos.ph != PH_END) begin
          rsp_pos <= next_pos(rsp_pos, t_q);
          if (next_pos(rsp_pos, t_q).ph == PH_END) done <= 1'b1;
        end
      end
    end
  end

  // Buffer write for the response of this cycle.
  always_comb begin
    buf_set  = set_q;
    buf_data = rd_rsp_data;
    if_we    = rd_rsp_valid && rsp_pos.ph == PH_IF;
    w_we     = rd_rsp_valid && rsp_pos.ph == PH_W;
    b_we     = rd_rsp_valid && rsp_pos.ph == PH_B;
    if_bank  = $bits(if_bank)'(rsp_pos.p0);
    if_addr  = IFAW'(rsp_pos.p1 * in_span(t_q.l.tc, t_q.l.k, t_q.l.s) + rsp_pos.p2);
    w_bank   = $bits(w_bank)'(rsp_pos.p0 * TN + rsp_pos.p1);
    w_addr   = WAW'(rsp_pos.p2 * t_q.l.k + rsp_pos.p3);
    b_mt     = $bits(b_mt)'(rsp_pos.p0);
  end

  // A response must belong to an outstanding request.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    rd_rsp_valid |-> rsp_pos.ph != PH_END);
endmodule
