// torr_top: similarity-gated hyperdimensional (HDC) task-reasoning accelerator.
// A query hypervector (one per detected object, from an event-camera encoder
// outside this design) is matched against M concept hypervectors; the result is
// reweighted by task weights and the winning class is returned to the host.
// Work is saved by reusing the previous windows' results:
//   * the PSU compares the query with the K cached queries while it loads;
//   * the QoS controller picks the path: bypass (reuse the object's cached
//     output), delta (correct the nearest cached query's scores at the flipped
//     dimensions only) or full (scan all D' active dimensions), and it sets the
//     effective dimension D' (bank gating) and score precision once per window;
//   * after the aligner, a top-k key and margin equal to the object's previous
//     ones skip the reasoner and reuse its cached output.
// The window sequence (latch controls, align in the selected mode, optionally
// reason, update caches, emit result) follows the paper's description; the
// handshakes, the command set and the per-phase ordering are this design's.
// Interface: a command channel (op/addr/data, valid/ready), a DMA write channel
// for 64-bit result records, and event counters for each mechanism. With the
// score-dump mode bit set, every query that was aligned (not bypassed) is
// followed on the DMA channel by ceil(M/8) words holding its M aligner scores
// (int8, 8 per word, lowest class in the low byte); the paper has scores
// returned to the host, the word format is this design's. The PSU-off mode
// bit hides the cached queries from the controller, so every query takes the
// full path (the paper's register file holds PSU and reasoner enables).
// Timing: full-path latency is about D' * ceil(M/W) cycles plus M (scoring),
// ceil(M/W) (reasoning) and D/CW (query-cache commit); the delta path replaces
// the first term by D'/CW + |Delta| * ceil(M/W) cycles.
module torr_top
  import torr_pkg::*;
#(
  parameter int unsigned D    = torr_pkg::D_DEF,
  parameter int unsigned B    = torr_pkg::B_DEF,
  parameter int unsigned M    = torr_pkg::M_DEF,
  parameter int unsigned W    = torr_pkg::W_DEF,
  parameter int unsigned K    = torr_pkg::K_DEF,
  parameter int unsigned CW   = torr_pkg::CW_DEF,
  parameter int unsigned NOBJ = torr_pkg::NOBJ_DEF,
  parameter int unsigned TOPK = torr_pkg::TOPK_DEF,
  parameter int unsigned FIFO = torr_pkg::FIFO_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  // host command channel
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  op_e         cmd_op,
  input  logic [31:0] cmd_addr,
  input  logic [63:0] cmd_data,
  // DMA write channel to host memory
  output logic        dma_valid,
  input  logic        dma_ready,
  output logic [31:0] dma_addr,
  output logic [63:0] dma_data,
  // event counters
  output logic [31:0] n_full,
  output logic [31:0] n_delta,
  output logic [31:0] n_bypass,
  output logic [31:0] n_gate_reuse,
  output logic [31:0] n_fifo_stall
);
  localparam int unsigned G    = (M + W - 1) / W;
  localparam int unsigned IW   = $clog2(D);
  localparam int unsigned GW   = (G > 1) ? $clog2(G) : 1;
  localparam int unsigned NCH  = D / CW;
  localparam int unsigned CHW  = $clog2(NCH);
  localparam int unsigned KW   = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned OW   = $clog2(NOBJ);
  localparam int unsigned ACCW = $clog2(D) + 2;
  localparam int unsigned SW   = $clog2(D) + 1;
  localparam int unsigned MQW  = 8;
  localparam int unsigned NDW  = (M + 7) / 8;  // score-dump words of 8 scores
  localparam int unsigned DWW  = $clog2(NDW + 1);

  // ---------------- host interface ----------------
  cfg_t             cfg;
  logic             core_busy;
  logic             h_im_wr, h_w_wr, h_win, h_q_valid, h_q_bind, h_run, h_wjob;
  logic [IW-1:0]    h_im_col;
  logic [GW-1:0]    h_im_grp;
  logic [W-1:0]     h_im_data;
  logic [7:0]       h_w_idx;
  logic signed [7:0] h_w_data;
  logic [15:0]      h_n_obj, h_q_depth;
  logic [CHW-1:0]   h_q_chunk;
  logic [CW-1:0]    h_q_data;
  logic [OW-1:0]    h_run_obj;
  logic             res_valid, res_ready;
  result_t          res;

  host_if #(.D(D), .M(M), .W(W), .CW(CW), .NOBJ(NOBJ)) u_host (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_addr, .cmd_data,
    .core_busy,
    .cfg,
    .im_wr(h_im_wr), .im_col(h_im_col), .im_grp(h_im_grp), .im_data(h_im_data),
    .w_wr(h_w_wr), .w_idx(h_w_idx), .w_data(h_w_data),
    .win_start(h_win), .n_obj(h_n_obj), .q_depth(h_q_depth),
    .q_valid(h_q_valid), .q_bind(h_q_bind), .q_chunk(h_q_chunk), .q_data(h_q_data),
    .run(h_run), .run_obj(h_run_obj), .run_wjob(h_wjob),
    .res_valid, .res_ready, .res,
    .dma_valid, .dma_ready, .dma_addr, .dma_data
  );

  // ---------------- QoS controller ----------------
  logic [B-1:0]           bank_en;
  logic [4:0]             nbanks_l2;
  logic [SW-1:0]          shift;
  logic                   prec_int4, high_load;
  logic                   decide;
  path_e                  path;
  logic signed [RHOW-1:0] rho_q;
  logic                   psu_found;
  logic [KW-1:0]          psu_nearest;
  logic [15:0]            psu_ndelta;
  logic                   oc_valid;

  qos_controller #(.D(D), .B(B), .M(M), .W(W)) u_ctrl (
    .clk, .rst_n, .cfg,
    .win_start(h_win), .n_obj(h_n_obj), .q_depth(h_q_depth),
    .bank_en, .nbanks_l2, .shift, .prec_int4, .high_load,
    .decide, .found(psu_found && !cfg.psu_off), .ndelta(psu_ndelta), .out_valid(oc_valid),
    .path, .rho_q
  );

  // ---------------- query cache, PSU, Delta FIFO ----------------
  logic               cq_rd_en;
  logic [CHW-1:0]     cq_rd_chunk;
  logic [CW-1:0]      cq_rd_hv [K];
  logic               cq_wr_en;
  logic [CHW-1:0]     cq_wr_chunk;
  logic [K-1:0]       cq_valid;
  logic [B-1:0]       cq_mask [K];
  logic [KW-1:0]      cq_victim;
  logic               cq_commit;
  logic               acc_rd_en, acc_wr_en;
  logic [KW-1:0]      acc_rd_entry, acc_wr_entry;
  logic [GW-1:0]      acc_rd_grp, acc_wr_grp;
  logic signed [ACCW-1:0] acc_rd_data [W];
  logic signed [ACCW-1:0] acc_wr_data [W];
  logic               inv_caches;

  logic               find, ext_start, ext_busy;
  logic               f_push, f_pop, f_empty, f_full;
  logic [IW-1:0]      f_din, f_dout;
  logic               qb_rd_en;
  logic [CHW-1:0]     qb_rd_chunk;
  logic [CW-1:0]      qb_rd_data;

  query_cache #(.D(D), .B(B), .K(K), .M(M), .W(W), .CW(CW), .ACCW(ACCW)) u_qcache (
    .clk, .rst_n, .inv_all(inv_caches),
    .rd_en(cq_rd_en), .rd_chunk(cq_rd_chunk), .rd_hv(cq_rd_hv),
    .wr_en(cq_wr_en), .wr_entry(cq_victim), .wr_chunk(cq_wr_chunk), .wr_data(qb_rd_data),
    .valid(cq_valid), .mask(cq_mask), .victim(cq_victim),
    .commit(cq_commit), .commit_mask(bank_en),
    .acc_rd_en, .acc_rd_entry, .acc_rd_grp, .acc_rd_data,
    .acc_wr_en, .acc_wr_entry, .acc_wr_grp, .acc_wr_data
  );

  logic           al_qb_rd_en, cm_qb_rd_en;
  logic [CHW-1:0] al_qb_rd_chunk, cm_qb_rd_chunk;
  assign qb_rd_en    = al_qb_rd_en || cm_qb_rd_en;
  assign qb_rd_chunk = cm_qb_rd_en ? cm_qb_rd_chunk : al_qb_rd_chunk;

  psu #(.D(D), .B(B), .K(K), .CW(CW)) u_psu (
    .clk, .rst_n, .bank_en,
    .q_valid(h_q_valid), .q_bind(h_q_bind), .q_chunk(h_q_chunk), .q_data(h_q_data),
    .cq_rd_en, .cq_rd_chunk, .cq_rd_hv, .cq_valid, .cq_mask,
    .find, .found(psu_found), .nearest(psu_nearest), .ndelta(psu_ndelta),
    .ext_start, .ext_busy, .fifo_push(f_push), .fifo_din(f_din), .fifo_full(f_full),
    .qb_rd_en, .qb_rd_chunk, .qb_rd_data
  );

  delta_fifo #(.DEPTH(FIFO), .DW(IW)) u_fifo (
    .clk, .rst_n, .clear(1'b0),
    .push(f_push), .din(f_din), .pop(f_pop), .dout(f_dout),
    .empty(f_empty), .full(f_full), .count()
  );

  // ---------------- item memory and aligner ----------------
  logic               im_rd_en;
  logic [IW-1:0]      im_rd_col;
  logic [GW-1:0]      im_rd_grp;
  logic [W-1:0]       im_rd_data;
  logic               al_start, al_delta, al_store, al_busy, al_done;
  logic signed [ACCW-1:0] acc [G*W];

  item_memory #(.D(D), .B(B), .M(M), .W(W)) u_imem (
    .clk,
    .rd_en(im_rd_en), .rd_col(im_rd_col), .rd_grp(im_rd_grp), .bank_en,
    .rd_data(im_rd_data), .rd_gated(),
    .wr_en(h_im_wr), .wr_col(h_im_col), .wr_grp(h_im_grp), .wr_data(h_im_data)
  );

  assoc_aligner #(.D(D), .B(B), .M(M), .W(W), .K(K), .CW(CW), .ACCW(ACCW)) u_align (
    .clk, .rst_n,
    .start(al_start), .delta_mode(al_delta), .store_en(al_store), .bank_en,
    .src_entry(psu_nearest), .dst_entry(cq_victim),
    .busy(al_busy), .done(al_done),
    .im_rd_en, .im_rd_col, .im_rd_grp, .im_rd_data,
    .qb_rd_en(al_qb_rd_en), .qb_rd_chunk(al_qb_rd_chunk), .qb_rd_data,
    .fifo_dout(f_dout), .fifo_empty(f_empty), .fifo_pop(f_pop), .src_busy(ext_busy),
    .acc_rd_en, .acc_rd_entry, .acc_rd_grp, .acc_rd_data,
    .acc_wr_en, .acc_wr_entry, .acc_wr_grp, .acc_wr_data,
    .acc_o(acc)
  );

  // ---------------- score buffer, reasoner, output cache ----------------
  logic               sb_start, sb_busy, sb_done, sb_int4;
  logic signed [7:0]  scores [G*W];
  logic [7:0]         key [TOPK];
  logic signed [7:0]  top1;
  logic [7:0]         margin, margin_q;

  score_buffer #(.M(M), .W(W), .ACCW(ACCW), .TOPK(TOPK), .SW(SW)) u_sbuf (
    .clk, .rst_n, .start(sb_start), .acc_i(acc), .shift, .prec_int4(sb_int4),
    .busy(sb_busy), .done(sb_done), .scores, .key, .top1, .margin, .margin_q
  );

  logic               rs_start, rs_busy, rs_done, w_load_all;
  logic [7:0]         rs_cls;
  logic signed [7:0]  rs_val;

  hdc_reasoner #(.M(M), .W(W)) u_reason (
    .clk, .rst_n,
    .w_wr_en(h_w_wr), .w_wr_idx(h_w_idx), .w_wr_data(h_w_data),
    .w_load_all, .w_load_vec(scores),
    .start(rs_start), .scores, .busy(rs_busy), .done(rs_done),
    .best_cls(rs_cls), .best_val(rs_val)
  );

  logic [OW-1:0]      obj;
  logic [7:0]         oc_key [TOPK];
  logic [MQW-1:0]     oc_margin;
  logic [7:0]         oc_cls;
  logic signed [7:0]  oc_score;
  logic               oc_wr, oc_inv;
  logic [7:0]         out_cls;
  logic signed [7:0]  out_score;

  output_cache #(.NOBJ(NOBJ), .TOPK(TOPK), .IDXW(8), .MQW(MQW)) u_ocache (
    .clk, .rst_n, .inv_all(oc_inv),
    .rd_obj(obj), .rd_valid(oc_valid), .rd_key(oc_key), .rd_margin(oc_margin),
    .rd_cls(oc_cls), .rd_score(oc_score),
    .wr_en(oc_wr), .wr_obj(obj), .wr_key(key), .wr_margin(margin_q),
    .wr_cls(out_cls), .wr_score(out_score)
  );

  // ---------------- window sequencer ----------------
  typedef enum logic [3:0] {
    S_IDLE, S_FIND, S_DECIDE, S_PATH, S_ALIGN, S_SCORE, S_GATE, S_REASON,
    S_WOUT, S_EMIT, S_DUMP, S_COMMIT, S_WALIGN, S_WSCORE
  } st_e;
  st_e          st;
  logic [CHW:0] cc;        // commit chunk counter
  logic [DWW-1:0] dw;      // score-dump word counter
  logic [63:0]  dump_word;
  logic         reused;
  logic         key_match;

  always_comb begin
    key_match = oc_valid && (oc_margin == margin_q);
    for (int i = 0; i < int'(TOPK); i++) if (oc_key[i] != key[i]) key_match = 1'b0;
  end

  assign core_busy  = (st != S_IDLE);
  assign inv_caches = h_im_wr;
  assign oc_inv     = h_im_wr || h_w_wr || (st == S_WSCORE && sb_done);
  assign find       = (st == S_FIND);
  assign decide     = (st == S_DECIDE);
  assign al_start   = (st == S_PATH && path != PATH_BYPASS) || (st == S_IDLE && h_run && h_wjob);
  assign al_delta   = (st == S_PATH) && (path == PATH_DELTA);
  assign al_store   = (st != S_WALIGN);
  assign ext_start  = (st == S_PATH) && (path == PATH_DELTA);
  assign sb_start   = al_done;
  assign sb_int4    = (st == S_WSCORE) ? 1'b0 : prec_int4;
  assign rs_start   = (st == S_GATE) && cfg.reason_en && !key_match;
  assign w_load_all = (st == S_WSCORE) && sb_done;
  assign oc_wr      = (st == S_WOUT) && !reused;
  assign res_valid  = (st == S_EMIT) || (st == S_DUMP);
  assign cm_qb_rd_en    = (st == S_COMMIT) && (cc < (CHW+1)'(NCH));
  assign cm_qb_rd_chunk = CHW'(cc);
  assign cq_wr_en       = (st == S_COMMIT) && (cc != '0);
  assign cq_wr_chunk    = CHW'(cc - 1'b1);
  assign cq_commit      = (st == S_COMMIT) && (cc == (CHW+1)'(NCH));

  // score dump: word n carries the aligner scores of classes 8n..8n+7,
  // class 8n in the low byte; classes past M read as zero
  always_comb begin
    dump_word = '0;
    for (int b = 0; b < 8; b++)
      if (int'(dw) * 8 + b < int'(M)) dump_word[8*b +: 8] = scores[int'(dw) * 8 + b];
  end

  always_comb begin
    res           = '0;
    res.obj       = 8'(obj);
    res.path      = path;
    res.reused    = reused;
    res.int4      = prec_int4;
    res.nbanks_l2 = nbanks_l2;
    res.ndelta    = psu_ndelta;
    res.rho       = rho_q;
    res.cls       = out_cls;
    res.score     = out_score;
    if (st == S_DUMP) res = result_t'(dump_word);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= S_IDLE;
      obj          <= '0;
      cc           <= '0;
      dw           <= '0;
      reused       <= 1'b0;
      out_cls      <= '0;
      out_score    <= '0;
      n_full       <= '0;
      n_delta      <= '0;
      n_bypass     <= '0;
      n_gate_reuse <= '0;
      n_fifo_stall <= '0;
    end else begin
      if (ext_busy && f_full) n_fifo_stall <= n_fifo_stall + 1'b1;
      case (st)
        S_IDLE: if (h_run) begin
          obj    <= h_run_obj;
          reused <= 1'b0;
          st     <= h_wjob ? S_WALIGN : S_FIND;
        end
        S_FIND:   st <= S_DECIDE;
        S_DECIDE: st <= S_PATH;
        S_PATH: begin
          case (path)
            PATH_BYPASS: begin
              n_bypass  <= n_bypass + 1'b1;
              reused    <= 1'b1;
              out_cls   <= oc_cls;
              out_score <= oc_score;
              st        <= S_EMIT;
            end
            PATH_DELTA: begin n_delta <= n_delta + 1'b1; st <= S_ALIGN; end
            default:    begin n_full  <= n_full  + 1'b1; st <= S_ALIGN; end
          endcase
        end
        S_ALIGN: if (al_done) st <= S_SCORE;
        S_SCORE: if (sb_done) st <= S_GATE;
        S_GATE: begin
          if (!cfg.reason_en) begin
            out_cls   <= key[0];
            out_score <= top1;
            st        <= S_WOUT;
          end else if (key_match) begin
            n_gate_reuse <= n_gate_reuse + 1'b1;
            reused       <= 1'b1;
            out_cls      <= oc_cls;
            out_score    <= oc_score;
            st           <= S_WOUT;
          end else begin
            st <= S_REASON;
          end
        end
        S_REASON: if (rs_done) begin
          out_cls   <= rs_cls;
          out_score <= rs_val;
          st        <= S_WOUT;
        end
        S_WOUT: st <= S_EMIT;
        S_EMIT: if (res_ready) begin
          cc <= '0;
          dw <= '0;
          if (path == PATH_BYPASS)  st <= S_IDLE;
          else if (cfg.score_dump)  st <= S_DUMP;
          else                      st <= S_COMMIT;
        end
        S_DUMP: if (res_ready) begin
          dw <= dw + 1'b1;
          if (dw == DWW'(NDW - 1)) st <= S_COMMIT;
        end
        S_COMMIT: begin
          cc <= cc + 1'b1;
          if (cc == (CHW+1)'(NCH)) st <= S_IDLE;
        end
        S_WALIGN: if (al_done) st <= S_WSCORE;
        S_WSCORE: if (sb_done) st <= S_IDLE;
        default:  st <= S_IDLE;
      endcase
    end
  end

  a_one_engine: assert property (@(posedge clk) disable iff (!rst_n) !(al_busy && rs_busy));
  a_sb_idle:    assert property (@(posedge clk) disable iff (!rst_n) sb_start |-> !sb_busy);
endmodule
