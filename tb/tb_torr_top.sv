// tb_torr_top: end-to-end test of the accelerator at reduced size
// (D = 512 in 4 banks, 16 classes on 8 lanes, 4 cached queries, a 16-entry
// Delta FIFO). The scenario and the reference model are in
// tb_torr_top_body.svh.
module tb_torr_top;
  import torr_pkg::*;

  localparam int unsigned D = 512, B = 4, M = 16, W = 8, K = 4, CW = 64;
  localparam int unsigned NOBJ = 8, TOPK = 4, FIFO = 16;
  localparam int unsigned WATCHDOG = 400000;
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

  torr_top #(.D(D), .B(B), .M(M), .W(W), .K(K), .CW(CW), .NOBJ(NOBJ), .TOPK(TOPK), .FIFO(FIFO)) dut (.*);


  `include "tb_torr_top_body.svh"
endmodule
