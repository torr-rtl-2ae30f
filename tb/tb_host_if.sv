// tb_host_if: drives every command type and checks the decoded strobes and
// fields, the configuration registers (including reset values), that no
// command is accepted while the core is busy, and the result DMA: records are
// written at dma_base + 8*n, held stable while the memory side stalls, and
// res_ready stays low while a record is pending.
module tb_host_if;
  import torr_pkg::*;
  localparam int unsigned D = 512, M = 16, W = 8, CW = 64, NOBJ = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid = 0, cmd_ready, core_busy = 0;
  op_e cmd_op = OP_CFG;
  logic [31:0] cmd_addr = '0;
  logic [63:0] cmd_data = '0;
  cfg_t cfg;
  logic im_wr, w_wr, win_start, q_valid, q_bind, run, run_wjob;
  logic [8:0] im_col;
  logic [0:0] im_grp;
  logic [W-1:0] im_data;
  logic [7:0] w_idx;
  logic signed [7:0] w_data;
  logic [15:0] n_obj, q_depth;
  logic [2:0] q_chunk, run_obj;
  logic [CW-1:0] q_data;
  logic res_valid = 0, res_ready, dma_valid, dma_ready = 1;
  result_t res = '0;
  logic [31:0] dma_addr;
  logic [63:0] dma_data;
  int checks = 0, failures = 0;

  host_if #(.D(D), .M(M), .W(W), .CW(CW), .NOBJ(NOBJ)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // present one command for one cycle and sample the decode in that cycle
  task automatic send(input op_e op, input int unsigned addr, input logic [63:0] data);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_addr = addr; cmd_data = data;
    #1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 chk(cfg.tau_byp == 16'd243 && cfg.tau_g == 16'd128 && cfg.reason_en && !cfg.prec_int4
           && cfg.dbudget == 16'(D / 8), "reset configuration");
    send(OP_IMEM, 2 * 77 + 1, 64'h5a);
    chk(im_wr && im_col == 9'd77 && im_grp == 1'b1 && im_data == 8'h5a && !w_wr && !q_valid, "imem decode");
    send(OP_WMEM, 9, 64'hf3);
    chk(w_wr && w_idx == 8'd9 && w_data == -8'sd13 && !im_wr, "wmem decode");
    send(OP_WINDOW, 0, 64'h0003_0012);
    chk(win_start && n_obj == 16'h12 && q_depth == 16'd3, "window decode");
    send(OP_QUERY, 6, 64'h0123_4567_89ab_cdef);
    chk(q_valid && !q_bind && q_chunk == 3'd6 && q_data == 64'h0123_4567_89ab_cdef, "query decode");
    send(OP_QBIND, 2, 64'h1);
    chk(q_valid && q_bind && q_chunk == 3'd2, "bind decode");
    send(OP_RUN, 5, 64'h1);
    chk(run && run_obj == 3'd5 && run_wjob, "run decode");
    send(OP_CFG, 32'(CFG_TAU_G), 64'd77);
    send(OP_CFG, 32'(CFG_MODE), 64'd13);
    send(OP_CFG, 32'(CFG_BUDGET), 64'd123456);
    send(OP_CFG, 32'(CFG_DMA_BASE), 64'h1000);
    @(negedge clk) cmd_valid = 0;
    chk(cfg.tau_g == 16'd77 && cfg.prec_int4 && !cfg.reason_en && cfg.score_dump && cfg.psu_off && cfg.budget == 32'd123456
        && cfg.dma_base == 32'h1000, "configuration writes");
    // busy core: nothing accepted
    core_busy = 1;
    send(OP_RUN, 1, 64'h0);
    chk(!cmd_ready && !run, "no command while busy");
    send(OP_CFG, 32'(CFG_TAU_G), 64'd5);
    @(negedge clk) cmd_valid = 0; core_busy = 0;
    chk(cfg.tau_g == 16'd77, "config not written while busy");
    // DMA sequence with stalls
    for (int n = 0; n < 6; n++) begin
      @(negedge clk);
      while (!res_ready) @(negedge clk);
      res = result_t'({$urandom, $urandom});
      res_valid = 1;
      @(negedge clk) res_valid = 0;
      chk(dma_valid && dma_addr == 32'h1000 + 32'(8 * n) && dma_data == 64'(res), $sformatf("dma record %0d", n));
      dma_ready = (n % 2 == 0);
      repeat (3) begin
        @(negedge clk);
        if (n % 2 == 1) chk(dma_valid && dma_data == 64'(res) && !res_ready, "dma held while stalled");
      end
      dma_ready = 1;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
