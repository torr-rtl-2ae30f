// assoc_aligner: the associative cosine aligner. W class lanes (sim_lane)
// accumulate the integer dot products <q, h_j> of the query with the concept
// hypervectors; normalisation by D' (a shift) happens downstream.
//  * Full mode: accumulators start at zero; an index generator streams every
//    column of the enabled banks (disabled banks are skipped, costing one idle
//    cycle each) and, per column, the ceil(M/W) lane groups, one column-group
//    per cycle: about D' * ceil(M/W) cycles, as in the paper.
//  * Delta mode: accumulators start from the nearest cached query's entry
//    (read from the query cache), then the aligner pops flipped indices from the
//    Delta-index FIFO and applies +/-2 corrections to those columns only:
//    |Delta| * ceil(M/W) cycles. It ends when the FIFO is empty and the PSU has
//    finished extracting.
//  * The final accumulators are written to query-cache entry dst (store_en),
//    so they persist for later delta updates, and are presented on acc_o.
// Reads of the item memory and query buffer have one cycle of latency; the
// datapath is a two-stage pipeline (read, accumulate). Modes, latencies and the
// +/-2 rule follow the paper; the lane-group sequencing is this design's.
module assoc_aligner #(
  parameter int unsigned D    = torr_pkg::D_DEF,
  parameter int unsigned B    = torr_pkg::B_DEF,
  parameter int unsigned M    = torr_pkg::M_DEF,
  parameter int unsigned W    = torr_pkg::W_DEF,
  parameter int unsigned K    = torr_pkg::K_DEF,
  parameter int unsigned CW   = torr_pkg::CW_DEF,
  parameter int unsigned ACCW = $clog2(torr_pkg::D_DEF) + 2,
  localparam int unsigned G     = (M + W - 1) / W,
  localparam int unsigned BANKW = D / B,
  localparam int unsigned IW    = $clog2(D),
  localparam int unsigned NCH   = D / CW,
  localparam int unsigned CHW   = $clog2(NCH),
  localparam int unsigned KW    = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned GW    = (G > 1) ? $clog2(G) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic                   delta_mode,
  input  logic                   store_en,
  input  logic [B-1:0]           bank_en,
  input  logic [KW-1:0]          src_entry,
  input  logic [KW-1:0]          dst_entry,
  output logic                   busy,
  output logic                   done,          // one-cycle pulse
  // item memory
  output logic                   im_rd_en,
  output logic [IW-1:0]          im_rd_col,
  output logic [GW-1:0]          im_rd_grp,
  input  logic [W-1:0]           im_rd_data,
  // query buffer
  output logic                   qb_rd_en,
  output logic [CHW-1:0]         qb_rd_chunk,
  input  logic [CW-1:0]          qb_rd_data,
  // Delta-index FIFO
  input  logic [IW-1:0]          fifo_dout,
  input  logic                   fifo_empty,
  output logic                   fifo_pop,
  input  logic                   src_busy,      // PSU still extracting
  // query-cache accumulators
  output logic                   acc_rd_en,
  output logic [KW-1:0]          acc_rd_entry,
  output logic [GW-1:0]          acc_rd_grp,
  input  logic signed [ACCW-1:0] acc_rd_data [W],
  output logic                   acc_wr_en,
  output logic [KW-1:0]          acc_wr_entry,
  output logic [GW-1:0]          acc_wr_grp,
  output logic signed [ACCW-1:0] acc_wr_data [W],
  // scores
  output logic signed [ACCW-1:0] acc_o [G*W]
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_RUN, S_DRAIN, S_STORE, S_DONE} st_e;
  st_e           st;
  logic          dmode;
  logic [IW:0]   col;       // one extra bit marks the end of the scan
  logic [GW-1:0] grp;
  logic [GW:0]   cnt;
  logic signed [ACCW-1:0] acc [G*W];

  // pipeline stage: the column-group read last cycle
  logic                  p_v;
  logic [GW-1:0]         p_grp;
  logic [$clog2(CW)-1:0] p_bit;

  logic [IW-1:0]  cur_col;
  logic           cur_bank_on;
  logic           rd_now;
  always_comb begin
    cur_col     = dmode ? fifo_dout : col[IW-1:0];
    cur_bank_on = bank_en[int'(cur_col) / int'(BANKW)];
    rd_now      = (st == S_RUN) && (dmode ? !fifo_empty : (!col[IW] && cur_bank_on));
  end

  assign im_rd_en    = rd_now;
  assign im_rd_col   = cur_col;
  assign im_rd_grp   = grp;
  assign qb_rd_en    = rd_now;
  assign qb_rd_chunk = CHW'(cur_col / CW);
  assign fifo_pop    = rd_now && dmode && (grp == GW'(G - 1));

  // lanes
  logic signed [ACCW-1:0] lane_in  [W];
  logic signed [ACCW-1:0] lane_out [W];
  logic                   q_bit;
  assign q_bit = qb_rd_data[p_bit];
  for (genvar l = 0; l < W; l++) begin : g_lane
    assign lane_in[l] = acc[int'(p_grp) * W + l];
    sim_lane #(.ACCW(ACCW)) u_lane (
      .q_bit  (q_bit),
      .h_bit  (im_rd_data[l]),
      .delta  (dmode),
      .acc_in (lane_in[l]),
      .acc_out(lane_out[l])
    );
  end

  // accumulator-cache ports
  assign acc_rd_en    = (st == S_LOAD) && (cnt < (GW+1)'(G));
  assign acc_rd_entry = src_entry;
  assign acc_rd_grp   = GW'(cnt);
  assign acc_wr_en    = (st == S_STORE) && store_en;
  assign acc_wr_entry = dst_entry;
  assign acc_wr_grp   = GW'(cnt);
  always_comb
    for (int l = 0; l < int'(W); l++) acc_wr_data[l] = acc[int'(cnt[GW-1:0]) * W + l];

  assign acc_o = acc;
  assign busy  = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= S_IDLE;
      dmode <= 1'b0;
      col   <= '0;
      grp   <= '0;
      cnt   <= '0;
      p_v   <= 1'b0;
      p_grp <= '0;
      p_bit <= '0;
      done  <= 1'b0;
      for (int j = 0; j < int'(G*W); j++) acc[j] <= '0;
    end else begin
      done  <= 1'b0;
      p_v   <= rd_now;
      p_grp <= grp;
      p_bit <= cur_col[$clog2(CW)-1:0];
      if (p_v)
        for (int l = 0; l < int'(W); l++) acc[int'(p_grp) * W + l] <= lane_out[l];
      case (st)
        S_IDLE: if (start) begin
          dmode <= delta_mode;
          col   <= '0;
          grp   <= '0;
          cnt   <= '0;
          if (delta_mode) st <= S_LOAD;
          else begin
            for (int j = 0; j < int'(G*W); j++) acc[j] <= '0;
            st <= S_RUN;
          end
        end
        S_LOAD: begin
          if (cnt != '0)
            for (int l = 0; l < int'(W); l++) acc[(int'(cnt) - 1) * W + l] <= acc_rd_data[l];
          cnt <= cnt + 1'b1;
          if (cnt == (GW+1)'(G)) st <= S_RUN;
        end
        S_RUN: begin
          if (dmode) begin
            if (!fifo_empty) grp <= (grp == GW'(G - 1)) ? '0 : grp + 1'b1;
            else if (!src_busy) st <= S_DRAIN;
          end else if (col[IW]) begin
            st <= S_DRAIN;
          end else if (!cur_bank_on) begin
            col <= (IW+1)'((int'(col) / int'(BANKW) + 1) * int'(BANKW));  // skip a gated bank
          end else begin
            grp <= (grp == GW'(G - 1)) ? '0 : grp + 1'b1;
            if (grp == GW'(G - 1)) col <= col + 1'b1;
          end
        end
        S_DRAIN: begin
          cnt <= '0;
          st  <= S_STORE;
        end
        S_STORE: begin
          cnt <= cnt + 1'b1;
          if (cnt == (GW+1)'(G - 1)) st <= S_DONE;
        end
        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
