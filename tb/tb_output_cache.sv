// tb_output_cache: writes random entries to random object slots, reads every
// slot back against a model (valid bit, key, margin, class, score), then
// invalidates all entries and checks that no slot stays valid.
module tb_output_cache;
  localparam int unsigned NOBJ = 16, TOPK = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic inv_all = 0, wr_en = 0, rd_valid;
  logic [3:0] rd_obj = '0, wr_obj = '0;
  logic [7:0] rd_key [TOPK], wr_key [TOPK];
  logic [7:0] rd_margin, wr_margin = '0, rd_cls, wr_cls = '0;
  logic signed [7:0] rd_score, wr_score = '0;
  bit m_v [NOBJ];
  logic [7:0] m_key [NOBJ][TOPK];
  logic [7:0] m_mg [NOBJ], m_cls [NOBJ], m_sc [NOBJ];
  int checks = 0, failures = 0;

  output_cache #(.NOBJ(NOBJ), .TOPK(TOPK), .IDXW(8), .MQW(8)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all();
    for (int o = 0; o < int'(NOBJ); o++) begin
      rd_obj = 4'(o);
      #1;
      checks++;
      if (rd_valid != m_v[o] || (m_v[o] && (rd_key != m_key[o] || rd_margin != m_mg[o]
          || rd_cls != m_cls[o] || rd_score != m_sc[o]))) begin
        failures++;
        $display("FAIL: slot %0d valid %0d exp %0d", o, rd_valid, m_v[o]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < int'(TOPK); i++) wr_key[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    read_all();
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      wr_en = 1;
      wr_obj = 4'($urandom);
      for (int i = 0; i < int'(TOPK); i++) wr_key[i] = 8'($urandom);
      wr_margin = 8'($urandom); wr_cls = 8'($urandom); wr_score = 8'($urandom);
      m_v[wr_obj] = 1; m_key[wr_obj] = wr_key; m_mg[wr_obj] = wr_margin;
      m_cls[wr_obj] = wr_cls; m_sc[wr_obj] = wr_score;
      @(negedge clk) wr_en = 0;
      read_all();
    end
    @(negedge clk) inv_all = 1;
    @(negedge clk) inv_all = 0;
    for (int o = 0; o < int'(NOBJ); o++) m_v[o] = 0;
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
