// tb_torr_top_full: the end-to-end scenario of tb_torr_top_body.svh on the
// accelerator at its default size (D = 8192 in 16 banks, 128 classes on 64
// lanes, 8 cached queries, 64 objects, a 256-entry Delta FIFO).
module tb_torr_top_full;
  import torr_pkg::*;

  localparam int unsigned D = D_DEF, B = B_DEF, M = M_DEF, W = W_DEF, K = K_DEF, CW = CW_DEF;
  localparam int unsigned NOBJ = NOBJ_DEF, TOPK = TOPK_DEF, FIFO = FIFO_DEF;
  localparam int unsigned WATCHDOG = 3000000;
  localparam int unsigned G = (M + W - 1) / W, BANKW = D / B, NCH = D / CW;

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


  `include "tb_torr_top_body.svh"
endmodule
