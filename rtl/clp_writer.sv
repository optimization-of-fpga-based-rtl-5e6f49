// clp_writer: copies a finished output tile from OF_BUF to off-chip memory.
//
// On start it walks the output maps mt < m_ext, rows rt < tr_ext and columns
// ct < tc_ext of `tile`, reads OF_BUF word rt*Tc + ct of every bank of the
// set being drained (data one cycle later), keeps the word of bank mt and
// writes it to OF[m0+mt][r0+rt][c0+ct] through a valid/ready write port.
// One word takes three cycles when the port is always ready (address, read
// data, write). `dr_en` is high while it owns the drain port of OF_BUF;
// `done` pulses after the last word was accepted. This is the write-back of
// the OF tile in the paper's tiled convolution; the port protocol is this
// design's choice.
module clp_writer
  import clp_pkg::*;
#(
  parameter int unsigned TM       = 24,
  parameter int unsigned OF_DEPTH = 169,
  localparam int unsigned OFAW = $clog2(OF_DEPTH),
  localparam int unsigned MTW  = (TM > 1) ? $clog2(TM) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  tile_t           tile,
  output logic            busy,
  output logic            done,
  // OF_BUF drain port
  output logic            dr_en,
  output logic [OFAW-1:0] dr_addr,
  input  word_t           dr_data [TM],
  // off-chip write port
  output logic            wr_valid,
  input  logic            wr_ready,
  output addr_t           wr_addr,
  output word_t           wr_data
);
  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_DATA, S_WRITE} state_e;
  state_e st;
  tile_t  t_q;
  cnt_t   mt, rt, ct;
  word_t  hold;

  assign busy     = (st != S_IDLE);
  assign dr_en    = busy;
  assign dr_addr  = OFAW'(rt * t_q.l.tc + ct);
  assign wr_valid = (st == S_WRITE);
  assign wr_data  = hold;
  assign wr_addr  = t_q.l.of_base
                  + ((addr_t'(t_q.m0) + addr_t'(mt)) * t_q.l.r + addr_t'(t_q.r0) + addr_t'(rt)) * t_q.l.c
                  + addr_t'(t_q.c0) + addr_t'(ct);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      t_q  <= '0;
      mt   <= '0; rt <= '0; ct <= '0;
      hold <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          t_q <= tile;
          mt <= '0; rt <= '0; ct <= '0;
          st <= S_ADDR;
        end
        S_ADDR: st <= S_DATA;
        S_DATA: begin
          hold <= dr_data[MTW'(mt)];
          st   <= S_WRITE;
        end
        S_WRITE: if (wr_ready) begin
          st <= S_ADDR;
          if (ct + 1'b1 < t_q.tc_ext) ct <= ct + 1'b1;
          else begin
            ct <= '0;
            if (rt + 1'b1 < t_q.tr_ext) rt <= rt + 1'b1;
            else begin
              rt <= '0;
              if (mt + 1'b1 < t_q.m_ext) mt <= mt + 1'b1;
              else begin
                st   <= S_IDLE;
                done <= 1'b1;
              end
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> st == S_IDLE);
endmodule
