// tb_score_buffer: random accumulators (including the saturating extremes
// +/-D') are normalised at int8 and int4 precision for two values of D'.
// Checks every score against acc / D' computed in real arithmetic (floor to
// Q.7, or to Q.3 then placed in the high nibble, with saturation), the top-k
// key (earlier class first on ties), top1, the margin and its quantised form,
// and that done arrives M + 1 cycles after start.
module tb_score_buffer;
  localparam int unsigned M = 20, W = 8, ACCW = 13, TOPK = 4, SW = 12, G = 3, MDROP = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, prec_int4 = 0, busy, done;
  logic signed [ACCW-1:0] acc_i [G*W];
  logic [SW-1:0] shift = '0;
  logic signed [7:0] scores [G*W];
  logic [7:0] key [TOPK];
  logic signed [7:0] top1;
  logic [7:0] margin, margin_q;
  int checks = 0, failures = 0;

  score_buffer #(.M(M), .W(W), .ACCW(ACCW), .TOPK(TOPK), .MDROP(MDROP), .SW(SW)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_norm(input int a, input int dp, input bit i4);
    int v;
    if (i4) begin
      v = int'($floor(real'(a) / dp * 8.0));
      if (v > 7) v = 7;
      return v * 16;
    end
    v = int'($floor(real'(a) / dp * 128.0));
    if (v > 127) v = 127;
    return v;
  endfunction

  initial begin
    int s[M], k[TOPK], lat, dp;
    bit used[M];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      dp = (t % 2 != 0) ? 1024 : 2048;
      prec_int4 = 1'((t / 2) % 2);
      for (int j = 0; j < int'(G*W); j++) acc_i[j] = '0;
      for (int j = 0; j < int'(M); j++) begin
        automatic int a = $urandom_range(2 * dp, 0) - dp;
        if (j == 3 && t % 5 == 0) a = dp;
        if (j == 4 && t % 5 == 0) a = -dp;
        acc_i[j] = ACCW'(a);
        s[j] = ref_norm(a, dp, prec_int4);
        used[j] = 0;
      end
      for (int n = 0; n < int'(TOPK); n++) begin
        automatic int b = -1;
        for (int j = 0; j < int'(M); j++) if (!used[j] && (b < 0 || s[j] > s[b])) b = j;
        used[b] = 1; k[n] = b;
      end
      @(negedge clk) start = 1; shift = SW'($clog2(dp));
      @(negedge clk) start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      for (int j = 0; j < int'(M); j++) begin
        checks++;
        if (int'(scores[j]) != s[j]) begin failures++; $display("FAIL: t%0d class %0d score %0d exp %0d", t, j, scores[j], s[j]); end
      end
      checks++;
      if (lat != int'(M) + 1) begin failures++; $display("FAIL: latency %0d", lat); end
      for (int n = 0; n < int'(TOPK); n++) begin
        checks++;
        if (int'(key[n]) != k[n]) begin failures++; $display("FAIL: t%0d key[%0d] %0d exp %0d (s=%0d exp s=%0d)", t, n, key[n], k[n], s[int'(key[n])], s[k[n]]); end
      end
      checks++;
      if (int'(top1) != s[k[0]] || int'(margin) != s[k[0]] - s[k[1]] || int'(margin_q) != (s[k[0]] - s[k[1]]) >> MDROP) begin
        failures++; $display("FAIL: t%0d top1/margin", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
