// tb_delta_fifo: random pushes and pops (never a push when full or a pop when
// empty) on an 8-deep FIFO, compared each cycle with a queue model: head value,
// empty, full and count. A final burst fills it to full and drains it.
module tb_delta_fifo;
  localparam int unsigned DEPTH = 8, DW = 13;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, push = 0, pop = 0, empty, full;
  logic [DW-1:0] din = '0, dout;
  logic [3:0] count;
  logic [DW-1:0] q [$];
  int checks = 0, failures = 0;

  delta_fifo #(.DEPTH(DEPTH), .DW(DW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    checks++;
    if (empty != (q.size() == 0) || full != (q.size() == DEPTH) || int'(count) != q.size()
        || (q.size() > 0 && dout != q[0])) begin
      failures++;
      $display("FAIL: size %0d count %0d empty %0d full %0d dout %0d", q.size(), count, empty, full, dout);
    end
  endtask

  task automatic step(input bit pu, input bit po);
    @(negedge clk);
    push = pu && (q.size() < DEPTH);
    pop  = po && (q.size() > 0);
    din  = DW'($urandom);
    @(posedge clk);
    if (pop) void'(q.pop_front());
    if (push) q.push_back(din);
    #1 compare();
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) step(1'($urandom), 1'($urandom));
    for (int i = 0; i < 12; i++) step(1, 0);
    for (int i = 0; i < 12; i++) step(0, 1);
    @(negedge clk) push = 0; pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
