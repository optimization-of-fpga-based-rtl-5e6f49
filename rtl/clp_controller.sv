// clp_controller: sequencing of one CLP through the tiled, unrolled
// convolution of its assigned layers.
//
// Three cooperating processes share two IF/W buffer sets and two OF sets:
//
// * Load sequencer: walks layer by layer, then output rows by Tr, columns by
//   Tc, output maps by TM and input maps by TN (the loop order of the paper's
//   optimised algorithm), builds a tile descriptor with the extents of partial
//   tiles, waits until the next IF/W set is free and starts clp_loader on it.
// * Compute: when the current IF/W set is loaded (and, for the first
//   input-map tile of an output tile, the OF set is drained) it runs one
//   compute stage: loops i, j over the kernel and rt, ct over the tile, one
//   engine issue per cycle, so a stage takes K*K*tr_ext*tc_ext cycles and a
//   layer ceil(N/TN)*ceil(M/TM)*R*C*K*K cycles (Eq. 3 of the paper). The
//   IF/W set is released after the stage's last read and the other set is
//   used next; after the last input-map tile the pipeline is drained and the
//   OF set is handed to the writer while the other OF set takes the next tile.
// * Write-back: starts clp_writer on each full OF set in turn.
//
// Engine timing, with LV = ceil(log2 TN) and issue in cycle t: IF/W read
// address at t; engine operands at t+1; OF read address at t+LV+1; OF write
// at t+LV+3. An OF word is read for its next update no earlier than two
// cycles after it was written (write-first RAM covers the equal case), so a
// pass over (rt, ct) shorter than two positions (a 1x1 tile) is padded with
// an idle cycle. Stalls (input set not loaded, OF set not drained) and pads
// are counted. The two-set discipline follows the paper; the stall, pad and
// counter logic is this design's.
module clp_controller
  import clp_pkg::*;
#(
  parameter int unsigned TN         = 3,
  parameter int unsigned TM         = 24,
  parameter int unsigned MAX_LAYERS = 3,
  parameter int unsigned IF_DEPTH   = 1521,
  parameter int unsigned W_DEPTH    = 121,
  parameter int unsigned OF_DEPTH   = 169,
  localparam int unsigned LV   = (TN > 1) ? $clog2(TN) : 0,
  localparam int unsigned IFAW = $clog2(IF_DEPTH),
  localparam int unsigned WAW  = $clog2(W_DEPTH),
  localparam int unsigned OFAW = $clog2(OF_DEPTH),
  localparam int unsigned IW   = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1,
  localparam int unsigned NW   = $clog2(MAX_LAYERS + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            busy,
  output logic            done,
  // layer table
  output logic [IW-1:0]   tbl_idx,
  input  layer_desc_t     tbl_desc,
  input  logic [NW-1:0]   num_layers,
  // loader
  output logic            ld_start,
  output tile_t           ld_tile,
  output logic            ld_set,
  input  logic            ld_done,
  // writer
  output logic            wr_start,
  output tile_t           wr_tile,
  output logic            wr_set,
  input  logic            wr_done,
  // buffers and engine
  output logic            cp_set,
  output logic [IFAW-1:0] if_rd_addr,
  output logic [WAW-1:0]  w_rd_addr,
  output logic            eng_valid,
  output logic [TN-1:0]   eng_lane_en,
  output logic            eng_use_bias,
  output logic            of_set,
  output logic [OFAW-1:0] of_rd_addr,
  output logic [TM-1:0]   of_wr_en,
  output logic [OFAW-1:0] of_wr_addr,
  // performance counters, cleared by start
  output logic [31:0]     cnt_issue,
  output logic [31:0]     cnt_stall_in,
  output logic [31:0]     cnt_stall_of,
  output logic [31:0]     cnt_pad
);
  localparam int unsigned DL = LV + 3;  // issue to OF write

  // ---------------- load sequencer ----------------
  logic running;
  logic seq_done;
  cnt_t r0, c0, m0, n0;
  logic ld_busy;
  logic [1:0]  in_full;
  tile_t       in_tile [2];
  tile_t       cur;

  function automatic cnt_t min_c(cnt_t a, cnt_t b);
    return (a < b) ? a : b;
  endfunction

  logic [NW-1:0] ld_idx_q;
  assign tbl_idx = IW'(ld_idx_q);

  always_comb begin
    cur         = '0;
    cur.l       = tbl_desc;
    cur.r0      = r0;
    cur.c0      = c0;
    cur.m0      = m0;
    cur.n0      = n0;
    cur.tr_ext  = min_c(tbl_desc.tr, tbl_desc.r - r0);
    cur.tc_ext  = min_c(tbl_desc.tc, tbl_desc.c - c0);
    cur.m_ext   = min_c(cnt_t'(TM), tbl_desc.m - m0);
    cur.n_ext   = min_c(cnt_t'(TN), tbl_desc.n - n0);
    cur.first_n = (n0 == '0);
    cur.last_n  = (n0 + cnt_t'(TN) >= tbl_desc.n);
  end

  assign ld_start = running && !seq_done && !ld_busy && !in_full[ld_set];
  assign ld_tile  = cur;

  // ---------------- compute ----------------
  typedef enum logic [1:0] {CP_IDLE, CP_RUN, CP_PAD, CP_DRAIN} cp_e;
  cp_e   cp_st;
  tile_t ct_q;
  cnt_t  ki, kj, rt, ct;
  logic [$clog2(DL+2)-1:0] drain_cnt;
  logic [1:0]  of_full;
  tile_t       of_tile [2];
  logic        wr_busy;
  logic        issue, last_issue, cp_begin;

  assign cp_begin = (cp_st == CP_IDLE) && in_full[cp_set]
                 && (!in_tile[cp_set].first_n || !of_full[of_set]);
  assign issue      = (cp_st == CP_RUN);
  assign last_issue = issue && (ct + 1'b1 >= ct_q.tc_ext) && (rt + 1'b1 >= ct_q.tr_ext)
                   && (kj + 1'b1 >= ct_q.l.k) && (ki + 1'b1 >= ct_q.l.k);

  // issue-cycle addresses
  cnt_t itw;
  assign itw        = in_span(ct_q.l.tc, ct_q.l.k, ct_q.l.s);
  assign if_rd_addr = IFAW'((ct_q.l.s * rt + ki) * itw + ct_q.l.s * ct + kj);
  assign w_rd_addr  = WAW'(ki * ct_q.l.k + kj);

  // delay line from issue to OF write
  typedef struct packed {
    logic            v;
    logic            bias;
    logic [TN-1:0]   lane;
    logic [TM-1:0]   tile;
    logic [OFAW-1:0] addr;
  } op_t;
  op_t op0;
  op_t dl [1:DL];

  always_comb begin
    op0      = '0;
    op0.v    = issue;
    op0.bias = ct_q.first_n && ki == '0 && kj == '0;
    for (int i = 0; i < TN; i++) op0.lane[i] = (cnt_t'(i) < ct_q.n_ext);
    for (int i = 0; i < TM; i++) op0.tile[i] = (cnt_t'(i) < ct_q.m_ext);
    op0.addr = OFAW'(rt * ct_q.l.tc + ct);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 1; k <= DL; k++) dl[k] <= '0;
    end else begin
      dl[1] <= op0;
      for (int k = 2; k <= DL; k++) dl[k] <= dl[k-1];
    end
  end

  assign eng_valid    = dl[1].v;
  assign eng_lane_en  = dl[1].lane;
  assign eng_use_bias = dl[1].bias;
  assign of_rd_addr   = dl[LV+1].addr;
  assign of_wr_addr   = dl[DL].addr;
  assign of_wr_en     = dl[DL].v ? dl[DL].tile : '0;

  // ---------------- write-back ----------------
  assign wr_start = running && !wr_busy && of_full[wr_set];
  assign wr_tile  = of_tile[wr_set];

  // ---------------- state ----------------
  logic all_idle;
  assign all_idle = seq_done && !ld_busy && in_full == 2'b00 && cp_st == CP_IDLE
                 && of_full == 2'b00 && !wr_busy;
  assign busy = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      seq_done <= 1'b1;
      done     <= 1'b0;
      ld_idx_q <= '0;
      r0 <= '0; c0 <= '0; m0 <= '0; n0 <= '0;
      ld_busy  <= 1'b0;
      ld_set   <= 1'b0;
      in_full  <= '0;
      in_tile[0] <= '0; in_tile[1] <= '0;
      cp_st    <= CP_IDLE;
      cp_set   <= 1'b0;
      ct_q     <= '0;
      ki <= '0; kj <= '0; rt <= '0; ct <= '0;
      drain_cnt <= '0;
      of_set   <= 1'b0;
      of_full  <= '0;
      of_tile[0] <= '0; of_tile[1] <= '0;
      wr_set   <= 1'b0;
      wr_busy  <= 1'b0;
      cnt_issue <= '0; cnt_stall_in <= '0; cnt_stall_of <= '0; cnt_pad <= '0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running  <= 1'b1;
        seq_done <= (num_layers == '0);
        ld_idx_q <= '0;
        r0 <= '0; c0 <= '0; m0 <= '0; n0 <= '0;
        cnt_issue <= '0; cnt_stall_in <= '0; cnt_stall_of <= '0; cnt_pad <= '0;
      end else if (running && all_idle) begin
        running <= 1'b0;
        done    <= 1'b1;
      end

      // load sequencer
      if (ld_start) begin
        ld_busy         <= 1'b1;
        in_tile[ld_set] <= cur;
        // advance n, m, c, r, layer
        if (n0 + cnt_t'(TN) < tbl_desc.n) n0 <= n0 + cnt_t'(TN);
        else begin
          n0 <= '0;
          if (m0 + cnt_t'(TM) < tbl_desc.m) m0 <= m0 + cnt_t'(TM);
          else begin
            m0 <= '0;
            if (c0 + tbl_desc.tc < tbl_desc.c) c0 <= c0 + tbl_desc.tc;
            else begin
              c0 <= '0;
              if (r0 + tbl_desc.tr < tbl_desc.r) r0 <= r0 + tbl_desc.tr;
              else begin
                r0 <= '0;
                if (ld_idx_q + 1'b1 < num_layers) ld_idx_q <= ld_idx_q + 1'b1;
                else seq_done <= 1'b1;
              end
            end
          end
        end
      end
      if (ld_done) begin
        ld_busy         <= 1'b0;
        in_full[ld_set] <= 1'b1;
        ld_set          <= !ld_set;
      end

      // compute
      case (cp_st)
        CP_IDLE: begin
          if (cp_begin) begin
            ct_q  <= in_tile[cp_set];
            ki <= '0; kj <= '0; rt <= '0; ct <= '0;
            cp_st <= CP_RUN;
          end else if (running && !all_idle) begin
            if (in_full[cp_set])          cnt_stall_of <= cnt_stall_of + 1;
            else if (!seq_done || ld_busy) cnt_stall_in <= cnt_stall_in + 1;
          end
        end
        CP_RUN: begin
          cnt_issue <= cnt_issue + 1;
          if (ct + 1'b1 < ct_q.tc_ext) ct <= ct + 1'b1;
          else begin
            ct <= '0;
            if (rt + 1'b1 < ct_q.tr_ext) rt <= rt + 1'b1;
            else begin
              rt <= '0;
              if (ct_q.tr_ext == 16'd1 && ct_q.tc_ext == 16'd1) cp_st <= CP_PAD;
              if (kj + 1'b1 < ct_q.l.k) kj <= kj + 1'b1;
              else begin
                kj <= '0;
                ki <= ki + 1'b1;
              end
            end
          end
          if (last_issue) begin
            in_full[cp_set] <= 1'b0;   // last buffer read happens this cycle
            cp_set          <= !cp_set;
            if (ct_q.last_n) begin
              cp_st     <= CP_DRAIN;
              drain_cnt <= '0;
            end else begin
              cp_st <= CP_IDLE;
            end
          end
        end
        CP_PAD: begin
          cnt_pad <= cnt_pad + 1;
          cp_st   <= CP_RUN;
        end
        CP_DRAIN: begin
          if (32'(drain_cnt) >= DL) begin
            of_full[of_set] <= 1'b1;
            of_tile[of_set] <= ct_q;
            of_set          <= !of_set;
            cp_st           <= CP_IDLE;
          end else drain_cnt <= drain_cnt + 1'b1;
        end
        default: cp_st <= CP_IDLE;
      endcase

      // write-back
      if (wr_start) wr_busy <= 1'b1;
      if (wr_done) begin
        wr_busy         <= 1'b0;
        of_full[wr_set] <= 1'b0;
        wr_set          <= !wr_set;
      end
    end
  end

  // The loader is only started on a free set and the compute stage only
  // reads a loaded one.
  a_load_free: assert property (@(posedge clk) disable iff (!rst_n) ld_start |-> !in_full[ld_set]);
  a_read_full: assert property (@(posedge clk) disable iff (!rst_n) issue |-> in_full[cp_set]);
  a_sets_apart: assert property (@(posedge clk) disable iff (!rst_n)
    (wr_busy && cp_st == CP_RUN) |-> wr_set != of_set);
endmodule
