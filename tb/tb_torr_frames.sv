// tb_torr_frames: a frame stream through the accelerator at its default size,
// the part of a task-oriented detection workload that runs on this hardware.
// Every frame opens a window for NO objects (NO >= N_hi, so the system counts
// as loaded) and runs one query per object. Object queries drift between
// frames the way event-camera features of a tracked object do, with three
// kinds of object: slow drift (1% of the bits per frame, so bypass until the
// drift adds up, then a delta update), fast drift (8% per frame, delta
// updates) and objects replaced by new ones every third frame (full scans).
// The hypervectors are random, not encoder outputs, and the object count is
// this testbench's choice. Every result record is checked against the
// reference model of tb_torr_model.svh. Frame cost is measured in cycles from
// the window command to the last record and checked against the 60 frames/s
// budget at 1 GHz (16,666,666 cycles). Every later frame must be cheaper than
// the first, which runs only full scans; bypass, delta and full must all occur.
module tb_torr_frames;
  import torr_pkg::*;

  localparam int unsigned D = D_DEF, B = B_DEF, M = M_DEF, W = W_DEF, K = K_DEF, CW = CW_DEF;
  localparam int unsigned NOBJ = NOBJ_DEF, TOPK = TOPK_DEF, FIFO = FIFO_DEF;
  localparam int unsigned WATCHDOG = 3000000;
  localparam int unsigned G = (M + W - 1) / W, BANKW = D / B, NCH = D / CW;
  localparam int unsigned NO = 6;            // objects per frame
  localparam int unsigned NF = 8;            // frames
  localparam int unsigned RT60_CYCLES = 16666666;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cmd_valid = 0, cmd_ready;
  op_e         cmd_op = OP_CFG;
  logic [31:0] cmd_addr = '0;
  logic [63:0] cmd_data = '0;
  logic        dma_valid, dma_ready = 1;
  logic [31:0] dma_addr;
  logic [63:0] dma_data;
  logic [31:0] n_full, n_delta, n_bypass, n_gate_reuse, n_fifo_stall;

  torr_top dut (.*);

  `include "tb_torr_model.svh"

  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  bit oq[NO][D];
  bit qt[D];

  initial begin
    int unsigned t0, cost, first;
    int f_full, f_delta, f_byp;
    init_design();
    for (int o = 0; o < int'(NO); o++)
      for (int i = 0; i < int'(D); i++) oq[o][i] = 1'($urandom);
    first = 0;
    for (int f = 0; f < int'(NF); f++) begin
      f_full = c_full; f_delta = c_delta; f_byp = c_byp;
      t0 = cyc;
      open_window(NO, 0);
      for (int o = 0; o < int'(NO); o++) begin
        if (f > 0) begin
          case (o % 3)
            0: begin qt = oq[o]; flip(qt, D / 100); oq[o] = qt; end
            1: begin qt = oq[o]; flip(qt, D * 8 / 100); oq[o] = qt; end
            default: if (f % 3 == 0) for (int i = 0; i < int'(D); i++) oq[o][i] = 1'($urandom);
          endcase
        end
        qt = oq[o];
        run_query(qt, o, $sformatf("f%0d.o%0d", f, o));
      end
      cost = cyc - t0;
      $display("frame %0d: %0d cycles (full %0d, delta %0d, bypass %0d)", f, cost,
               c_full - f_full, c_delta - f_delta, c_byp - f_byp);
      check(cost <= RT60_CYCLES, $sformatf("frame %0d over the 60 FPS budget", f));
      if (f == 0) first = cost;
      else check(cost < first, $sformatf("frame %0d not cheaper than the first", f));
    end
    check(c_full > 0 && c_delta > 0 && c_byp > 0, "all three paths taken");
    $display("paths: full=%0d delta=%0d bypass=%0d gate_reuse=%0d", c_full, c_delta, c_byp, c_gate);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
