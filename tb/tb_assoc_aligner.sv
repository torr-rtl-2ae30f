// tb_assoc_aligner: the aligner with a real item_memory and delta_fifo; the
// query buffer and the query-cache accumulator store are behavioural models
// with one cycle of read latency. Checks, against dot products computed
// directly from the bits:
//   full scan with all banks, full scan with half the banks gated (D' = D/2),
//   and delta updates seeded from the stored accumulators of an earlier query,
//   with the flipped indices pushed by the test while src_busy is high;
// the accumulators written back to the destination entry; and the latencies,
// D' * ceil(M/W) for full scans and |Delta| * ceil(M/W) for delta updates
// (plus a small fixed overhead).
module tb_assoc_aligner;
  localparam int unsigned D = 256, B = 4, M = 12, W = 8, K = 4, CW = 32, ACCW = 10;
  localparam int unsigned G = 2, NCH = D / CW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, delta_mode = 0, store_en = 1, busy, done;
  logic [B-1:0] bank_en = '1;
  logic [1:0] src_entry = '0, dst_entry = '0;
  logic im_rd_en, qb_rd_en, fifo_pop, acc_rd_en, acc_wr_en;
  logic [7:0] im_rd_col;
  logic [0:0] im_rd_grp, acc_rd_grp, acc_wr_grp;
  logic [W-1:0] im_rd_data;
  logic [2:0] qb_rd_chunk;
  logic [CW-1:0] qb_rd_data;
  logic [7:0] fifo_dout;
  logic fifo_empty, fifo_full, src_busy = 0;
  logic [1:0] acc_rd_entry, acc_wr_entry;
  logic signed [ACCW-1:0] acc_rd_data [W], acc_wr_data [W];
  logic signed [ACCW-1:0] acc_o [G*W];
  // fifo / item-memory host side
  logic f_push = 0;
  logic [7:0] f_din = '0;
  logic im_wr = 0;
  logic [7:0] im_wr_col = '0;
  logic [0:0] im_wr_grp = '0;
  logic [W-1:0] im_wr_data = '0;
  // models
  bit h [M][D];
  bit q [D];
  logic signed [ACCW-1:0] store [K][G][W];
  int checks = 0, failures = 0;

  assoc_aligner #(.D(D), .B(B), .M(M), .W(W), .K(K), .CW(CW), .ACCW(ACCW)) dut (.*);

  item_memory #(.D(D), .B(B), .M(M), .W(W)) u_im (
    .clk, .rd_en(im_rd_en), .rd_col(im_rd_col), .rd_grp(im_rd_grp), .bank_en,
    .rd_data(im_rd_data), .rd_gated(),
    .wr_en(im_wr), .wr_col(im_wr_col), .wr_grp(im_wr_grp), .wr_data(im_wr_data));

  delta_fifo #(.DEPTH(16), .DW(8)) u_fifo (
    .clk, .rst_n, .clear(1'b0), .push(f_push), .din(f_din), .pop(fifo_pop),
    .dout(fifo_dout), .empty(fifo_empty), .full(fifo_full), .count());

  always_ff @(posedge clk) begin
    logic [CW-1:0] c;
    if (qb_rd_en) begin
      for (int b = 0; b < int'(CW); b++) c[b] = q[int'(qb_rd_chunk) * CW + b];
      qb_rd_data <= c;
    end
    if (acc_rd_en) acc_rd_data <= store[acc_rd_entry][acc_rd_grp];
    if (acc_wr_en) store[acc_wr_entry][acc_wr_grp] <= acc_wr_data;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int dot(input int j);
    int s = 0;
    for (int i = 0; i < int'(D); i++) if (bank_en[i / (D / B)]) s += (q[i] == h[j][i]) ? 1 : -1;
    return s;
  endfunction

  task automatic check_scores(input string tag, input int dst);
    for (int j = 0; j < int'(M); j++) begin
      checks++;
      if (int'(acc_o[j]) != dot(j) || int'(store[dst][j / W][j % W]) != dot(j)) begin
        failures++;
        $display("FAIL: %s class %0d acc %0d stored %0d exp %0d", tag, j, acc_o[j], store[dst][j / W][j % W], dot(j));
      end
    end
  endtask

  task automatic run_full(input int dst, input string tag);
    int lat = 0, dp = 0;
    for (int b = 0; b < int'(B); b++) if (bank_en[b]) dp += D / B;
    @(negedge clk) start = 1; delta_mode = 0; dst_entry = 2'(dst);
    @(negedge clk) start = 0;
    while (!done) begin @(negedge clk); lat++; end
    check_scores(tag, dst);
    checks++;
    if (lat < dp * int'(G) || lat > dp * int'(G) + int'(B) + 8) begin
      failures++; $display("FAIL: %s latency %0d for D'=%0d", tag, lat, dp);
    end
  endtask

  task automatic run_delta(input int src, input int dst, input int nflip, input string tag);
    int idx[$], lat = 0;
    bit seen [D];
    for (int f = 0; f < nflip; f++) begin
      int i;
      do i = $urandom_range(D - 1, 0); while (seen[i] || !bank_en[i / (D / B)]);
      seen[i] = 1; idx.push_back(i); q[i] = !q[i];
    end
    idx.sort();
    @(negedge clk) start = 1; delta_mode = 1; src_entry = 2'(src); dst_entry = 2'(dst); src_busy = 1;
    @(negedge clk) start = 0;
    foreach (idx[n]) begin
      while (fifo_full) begin @(negedge clk); lat++; end
      f_push = 1; f_din = 8'(idx[n]);
      @(negedge clk); lat++;
      f_push = 0;
    end
    src_busy = 0;
    while (!done) begin @(negedge clk); lat++; end
    check_scores(tag, dst);
    checks++;
    if (lat < nflip * int'(G) || lat > nflip * int'(G) + int'(G) + 10) begin
      failures++; $display("FAIL: %s latency %0d for |Delta|=%0d", tag, lat, nflip);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < int'(M); j++) for (int i = 0; i < int'(D); i++) h[j][i] = 1'($urandom);
    for (int i = 0; i < int'(D); i++) q[i] = 1'($urandom);
    for (int c = 0; c < int'(D); c++)
      for (int g = 0; g < int'(G); g++) begin
        @(negedge clk);
        im_wr = 1; im_wr_col = 8'(c); im_wr_grp = 1'(g);
        for (int l = 0; l < int'(W); l++) im_wr_data[l] = (g * W + l < M) ? h[g * W + l][c] : 1'b0;
      end
    @(negedge clk) im_wr = 0;
    run_full(0, "full");
    run_delta(0, 1, 7, "delta-7");
    run_delta(1, 2, 30, "delta-30");
    run_delta(2, 2, 0, "delta-0");
    bank_en = 4'b0011;
    run_full(3, "gated-full");
    run_delta(3, 0, 12, "gated-delta");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
