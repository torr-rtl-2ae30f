// tb_query_cache: writes random hypervector chunks and accumulator groups to
// every entry, reads them back (hypervector chunks of all entries in parallel,
// one cycle of latency), checks that commits set valid and mask and advance
// the round-robin victim with wrap-around, and that inv_all clears all entries.
module tb_query_cache;
  localparam int unsigned D = 256, B = 4, K = 4, M = 12, W = 8, CW = 32, ACCW = 10, G = 2, NCH = D / CW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic inv_all = 0, rd_en = 0, wr_en = 0, commit = 0, acc_rd_en = 0, acc_wr_en = 0;
  logic [2:0] rd_chunk = '0, wr_chunk = '0;
  logic [1:0] wr_entry = '0, victim, acc_rd_entry = '0, acc_wr_entry = '0;
  logic [0:0] acc_rd_grp = '0, acc_wr_grp = '0;
  logic [CW-1:0] rd_hv [K];
  logic [CW-1:0] wr_data = '0;
  logic [K-1:0] valid;
  logic [B-1:0] mask [K];
  logic [B-1:0] commit_mask = '0;
  logic signed [ACCW-1:0] acc_rd_data [W], acc_wr_data [W];
  logic [CW-1:0] m_hv [K][NCH];
  logic signed [ACCW-1:0] m_acc [K][G][W];
  int checks = 0, failures = 0;

  query_cache #(.D(D), .B(B), .K(K), .M(M), .W(W), .CW(CW), .ACCW(ACCW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < int'(W); l++) acc_wr_data[l] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < int'(K); k++) begin
      for (int c = 0; c < int'(NCH); c++) begin
        @(negedge clk);
        wr_en = 1; wr_entry = 2'(k); wr_chunk = 3'(c); wr_data = CW'($urandom);
        m_hv[k][c] = wr_data;
      end
      for (int g = 0; g < int'(G); g++) begin
        @(negedge clk);
        wr_en = 0;
        acc_wr_en = 1; acc_wr_entry = 2'(k); acc_wr_grp = 1'(g);
        for (int l = 0; l < int'(W); l++) begin
          acc_wr_data[l] = ACCW'($urandom);
          m_acc[k][g][l] = acc_wr_data[l];
        end
      end
      @(negedge clk) acc_wr_en = 0;
    end
    for (int c = 0; c < int'(NCH); c++) begin
      @(negedge clk) rd_en = 1; rd_chunk = 3'(c);
      @(negedge clk) rd_en = 0;
      for (int k = 0; k < int'(K); k++) begin
        checks++;
        if (rd_hv[k] != m_hv[k][c]) begin failures++; $display("FAIL: hv entry %0d chunk %0d", k, c); end
      end
    end
    for (int k = 0; k < int'(K); k++)
      for (int g = 0; g < int'(G); g++) begin
        @(negedge clk) acc_rd_en = 1; acc_rd_entry = 2'(k); acc_rd_grp = 1'(g);
        @(negedge clk) acc_rd_en = 0;
        checks++;
        if (acc_rd_data != m_acc[k][g]) begin failures++; $display("FAIL: acc entry %0d grp %0d", k, g); end
      end
    // commits: valid, mask, round-robin victim
    for (int n = 0; n < 6; n++) begin
      int v;
      @(negedge clk);
      v = int'(victim);
      checks++;
      if (v != n % K) begin failures++; $display("FAIL: victim %0d exp %0d", v, n % K); end
      commit = 1; commit_mask = 4'(n + 1);
      @(negedge clk) commit = 0;
      checks++;
      if (!valid[v] || mask[v] != 4'(n + 1)) begin failures++; $display("FAIL: commit %0d", n); end
    end
    @(negedge clk) inv_all = 1;
    @(negedge clk) inv_all = 0;
    checks++;
    if (valid != '0 || victim != '0) begin failures++; $display("FAIL: inv_all"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
