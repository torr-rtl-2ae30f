// tb_hdc_reasoner: random Q.7 scores and task weights (host-written one by one
// or loaded as a whole vector); checks the winning class and score against
// s_j * w_j computed in real arithmetic, rounded half up to Q.7 and
// saturated (first class wins ties), and that done comes ceil(M/W) + 1 cycles
// after start (one cycle to register start, then one lane group per cycle).
module tb_hdc_reasoner;
  localparam int unsigned M = 20, W = 8, G = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_wr_en = 0, w_load_all = 0, start = 0, busy, done;
  logic [7:0] w_wr_idx = '0, best_cls;
  logic signed [7:0] w_wr_data = '0, best_val;
  logic signed [7:0] w_load_vec [G*W], scores [G*W];
  int wm [G*W];
  int checks = 0, failures = 0;

  hdc_reasoner #(.M(M), .W(W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bc, bv, p, lat;
    for (int j = 0; j < int'(G*W); j++) begin w_load_vec[j] = '0; scores[j] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      if (t % 3 == 0) begin
        for (int j = 0; j < int'(G*W); j++) begin w_load_vec[j] = 8'($urandom); wm[j] = int'(w_load_vec[j]); end
        @(negedge clk) w_load_all = 1;
        @(negedge clk) w_load_all = 0;
      end else begin
        for (int j = 0; j < int'(M); j++) begin
          @(negedge clk) w_wr_en = 1; w_wr_idx = 8'(j); w_wr_data = 8'($urandom_range(255, 0));
          wm[j] = int'(w_wr_data);
        end
        @(negedge clk) w_wr_en = 0;
      end
      for (int j = 0; j < int'(G*W); j++) scores[j] = 8'($urandom);
      if (t % 7 == 0) begin scores[2] = -8'sd128; wm[2] = -128; w_load_vec[2] = -8'sd128; end
      if (t % 7 == 0) begin
        @(negedge clk) w_wr_en = 1; w_wr_idx = 8'd2; w_wr_data = -8'sd128;
        @(negedge clk) w_wr_en = 0;
      end
      bc = -1; bv = 0;
      for (int j = 0; j < int'(M); j++) begin
        p = int'($floor(real'(scores[j]) * real'(wm[j]) / 128.0 + 0.5));
        if (p > 127) p = 127;
        if (bc < 0 || p > bv) begin bc = j; bv = p; end
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (int'(best_cls) != bc || int'(best_val) != bv || lat != int'(G) + 1) begin
        failures++;
        $display("FAIL: t%0d best %0d/%0d exp %0d/%0d lat %0d", t, best_cls, best_val, bc, bv, lat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
