// tb_topk_sorter: feeds random signed scores (narrow range, so ties are
// common) and compares the sorter's list after every insertion with a model
// that picks the TOPK largest so far, earlier entries first on ties.
module tb_topk_sorter;
  localparam int unsigned TOPK = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0;
  logic signed [7:0] in_val = '0;
  logic [7:0] in_idx = '0;
  logic signed [7:0] top_val [TOPK];
  logic [7:0] top_idx [TOPK];
  logic [TOPK-1:0] top_vld;
  int vals[$], idxs[$];
  int checks = 0, failures = 0;

  topk_sorter #(.TOPK(TOPK), .VW(8), .IDXW(8)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic model_check();
    bit used[$];
    int n = vals.size();
    used = {};
    for (int i = 0; i < n; i++) used.push_back(0);
    for (int t = 0; t < int'(TOPK); t++) begin
      int b = -1;
      for (int i = 0; i < n; i++) if (!used[i] && (b < 0 || vals[i] > vals[b])) b = i;
      checks++;
      if (b < 0) begin
        if (top_vld[t]) begin failures++; $display("FAIL: slot %0d valid too early", t); end
      end else begin
        used[b] = 1;
        if (!top_vld[t] || top_val[t] != 8'(vals[b]) || top_idx[t] != 8'(idxs[b])) begin
          failures++;
          $display("FAIL: slot %0d got %0d/%0d exp %0d/%0d", t, top_val[t], top_idx[t], vals[b], idxs[b]);
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 40; run++) begin
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      vals = {}; idxs = {};
      for (int j = 0; j < 24; j++) begin
        @(negedge clk);
        in_valid = 1;
        in_val   = 8'($urandom_range(20, 0)) - 8'sd10;
        in_idx   = 8'(j);
        vals.push_back(int'(in_val));
        idxs.push_back(j);
        @(negedge clk) in_valid = 0;
        model_check();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
