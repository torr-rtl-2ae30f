// host_if: host interface and result DMA.
// Commands arrive on a valid/ready channel (op, addr, 64-bit data) and are
// decoded into one-cycle strobes: configuration-register writes (held here in
// cfg), item-memory and task-weight writes, window opening (object count N and
// queue depth q), query-chunk loads and binds, and run requests. A command is
// accepted only while the core is idle, so commands never race a window in
// progress. Results leave through a one-entry DMA: each 64-bit result record
// is written to host memory at dma_base + 8*n (n counts records since
// dma_base was last set) on a valid/ready write channel. The paper has the host
// interface ingest queries and return scores via DMA; the command set, the
// register map and the record layout are this design's.
module host_if
  import torr_pkg::*;
#(
  parameter int unsigned D    = torr_pkg::D_DEF,
  parameter int unsigned M    = torr_pkg::M_DEF,
  parameter int unsigned W    = torr_pkg::W_DEF,
  parameter int unsigned CW   = torr_pkg::CW_DEF,
  parameter int unsigned NOBJ = torr_pkg::NOBJ_DEF,
  localparam int unsigned G   = (M + W - 1) / W,
  localparam int unsigned IW  = $clog2(D),
  localparam int unsigned GW  = (G > 1) ? $clog2(G) : 1,
  localparam int unsigned CHW = $clog2(D / CW),
  localparam int unsigned OW  = $clog2(NOBJ)
) (
  input  logic            clk,
  input  logic            rst_n,
  // command channel
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  op_e             cmd_op,
  input  logic [31:0]     cmd_addr,
  input  logic [63:0]     cmd_data,
  input  logic            core_busy,
  // decoded
  output cfg_t            cfg,
  output logic            im_wr,
  output logic [IW-1:0]   im_col,
  output logic [GW-1:0]   im_grp,
  output logic [W-1:0]    im_data,
  output logic            w_wr,
  output logic [7:0]      w_idx,
  output logic signed [7:0] w_data,
  output logic            win_start,
  output logic [15:0]     n_obj,
  output logic [15:0]     q_depth,
  output logic            q_valid,
  output logic            q_bind,
  output logic [CHW-1:0]  q_chunk,
  output logic [CW-1:0]   q_data,
  output logic            run,
  output logic [OW-1:0]   run_obj,
  output logic            run_wjob,
  // results from the core
  input  logic            res_valid,
  output logic            res_ready,
  input  result_t         res,
  // DMA write channel to host memory
  output logic            dma_valid,
  input  logic            dma_ready,
  output logic [31:0]     dma_addr,
  output logic [63:0]     dma_data
);
  logic acc;
  assign cmd_ready = !core_busy;
  assign acc       = cmd_valid && cmd_ready;

  // decode (combinational strobes)
  always_comb begin
    im_wr     = acc && cmd_op == OP_IMEM;
    im_col    = IW'(cmd_addr / G);
    im_grp    = GW'(cmd_addr % G);
    im_data   = W'(cmd_data);
    w_wr      = acc && cmd_op == OP_WMEM;
    w_idx     = cmd_addr[7:0];
    w_data    = cmd_data[7:0];
    win_start = acc && cmd_op == OP_WINDOW;
    n_obj     = cmd_data[15:0];
    q_depth   = cmd_data[31:16];
    q_valid   = acc && (cmd_op == OP_QUERY || cmd_op == OP_QBIND);
    q_bind    = cmd_op == OP_QBIND;
    q_chunk   = CHW'(cmd_addr);
    q_data    = CW'(cmd_data);
    run       = acc && cmd_op == OP_RUN;
    run_obj   = OW'(cmd_addr);
    run_wjob  = cmd_data[0];
  end

  // configuration registers
  logic [31:0] seq;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg           <= '0;
      cfg.tau_byp   <= 16'd243;          // 0.95 in Q.8
      cfg.tau_g     <= 16'd128;          // 0.50 in Q.8
      cfg.n_hi      <= 16'd16;
      cfg.q_hi      <= 16'd4;
      cfg.budget    <= 32'hffff_ffff;    // no budget limit: all banks
      cfg.dbudget   <= 16'(D / 8);
      cfg.reason_en <= 1'b1;
    end else if (acc && cmd_op == OP_CFG) begin
      case (cmd_addr[3:0])
        CFG_TAU_BYP:  cfg.tau_byp  <= cmd_data[15:0];
        CFG_TAU_G:    cfg.tau_g    <= cmd_data[15:0];
        CFG_N_HI:     cfg.n_hi     <= cmd_data[15:0];
        CFG_Q_HI:     cfg.q_hi     <= cmd_data[15:0];
        CFG_BUDGET:   cfg.budget   <= cmd_data[31:0];
        CFG_DBUDGET:  cfg.dbudget  <= cmd_data[15:0];
        CFG_MODE: begin
          cfg.prec_int4  <= cmd_data[0];
          cfg.reason_en  <= cmd_data[1];
          cfg.score_dump <= cmd_data[2];
          cfg.psu_off    <= cmd_data[3];
        end
        CFG_DMA_BASE: cfg.dma_base <= cmd_data[31:0];
        default: ;
      endcase
    end
  end

  // result DMA
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dma_valid <= 1'b0;
      dma_addr  <= '0;
      dma_data  <= '0;
      seq       <= '0;
    end else begin
      if (acc && cmd_op == OP_CFG && cmd_addr[3:0] == CFG_DMA_BASE) seq <= '0;
      if (dma_valid && dma_ready) dma_valid <= 1'b0;
      if (res_valid && res_ready) begin
        dma_valid <= 1'b1;
        dma_addr  <= cfg.dma_base + (seq << 3);
        dma_data  <= res;
        seq       <= seq + 1'b1;
      end
    end
  end
  assign res_ready = !dma_valid;

  a_dma_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               dma_valid && !dma_ready |=> dma_valid && $stable(dma_data));
endmodule
