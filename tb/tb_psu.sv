// tb_psu: partial-similarity unit against a behavioural query cache (four
// entries, one-cycle registered read like query_cache). For several rounds it
// loads a query close to one cached entry (chunks with random gaps), checks
// the nearest entry and |Delta| over the enabled banks only (entries with a
// different bank mask must be ignored), then extracts Delta while the FIFO
// randomly reports full and checks that exactly the flipped positions of the
// enabled banks are pushed, in ascending order, never while full. It also
// checks the query-buffer read port and that a bind load XORs into the buffer.
module tb_psu;
  localparam int unsigned D = 256, B = 4, K = 4, CW = 32, NCH = D / CW, CPB = (D / B) / CW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [B-1:0] bank_en = '1;
  logic q_valid = 0, q_bind = 0, find = 0, ext_start = 0, fifo_full = 0, qb_rd_en = 0;
  logic [2:0] q_chunk = '0, cq_rd_chunk, qb_rd_chunk = '0;
  logic [CW-1:0] q_data = '0, qb_rd_data;
  logic cq_rd_en;
  logic [CW-1:0] cq_rd_hv [K];
  logic [K-1:0] cq_valid;
  logic [B-1:0] cq_mask [K];
  logic found, ext_busy, fifo_push;
  logic [1:0] nearest;
  logic [15:0] ndelta;
  logic [7:0] fifo_din;
  logic [CW-1:0] cache [K][NCH];
  int checks = 0, failures = 0;

  psu #(.D(D), .B(B), .K(K), .CW(CW)) dut (.*);

  always_ff @(posedge clk)
    if (cq_rd_en) for (int k = 0; k < int'(K); k++) cq_rd_hv[k] <= cache[k][cq_rd_chunk];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit on(input int i);
    return bank_en[i / (D / B)];
  endfunction

  int pushed[$];
  always @(posedge clk)
    if (fifo_push) begin
      if (fifo_full) begin failures++; $display("FAIL: push while full"); end
      pushed.push_back(int'(fifo_din));
    end
  always @(negedge clk) fifo_full = ($urandom_range(3, 0) == 0);

  initial begin
    logic [CW-1:0] q [NCH];
    int target, exp_near, exp_nd, hd;
    int expd[$];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 12; round++) begin
      bank_en = (round % 3 == 2) ? 4'b0011 : 4'b1111;
      for (int k = 0; k < int'(K); k++) begin
        for (int c = 0; c < int'(NCH); c++) cache[k][c] = CW'($urandom);
        cq_valid[k] = (k != 2 || round % 2 == 0);
        cq_mask[k]  = (k == 3) ? ~bank_en : bank_en;
      end
      target = $urandom_range(1, 0);
      for (int c = 0; c < int'(NCH); c++) q[c] = cache[target][c];
      for (int f = 0; f < 3 + round; f++) begin
        automatic int i = $urandom_range(D - 1, 0);
        q[i / CW][i % CW] = !q[i / CW][i % CW];
      end
      // model
      exp_near = -1; exp_nd = 0;
      for (int k = 0; k < int'(K); k++) begin
        if (!cq_valid[k] || cq_mask[k] != bank_en) continue;
        hd = 0;
        for (int i = 0; i < int'(D); i++) if (on(i) && q[i / CW][i % CW] != cache[k][i / CW][i % CW]) hd++;
        if (exp_near < 0 || hd < exp_nd) begin exp_near = k; exp_nd = hd; end
      end
      // load
      for (int c = 0; c < int'(NCH); c++) begin
        @(negedge clk);
        q_valid = 1; q_chunk = 3'(c); q_data = q[c];
        @(negedge clk) q_valid = 0;
        if ($urandom_range(1, 0) != 0) @(negedge clk);
      end
      @(negedge clk);
      find = 1;
      @(negedge clk) find = 0;
      checks++;
      if (!found || int'(nearest) != exp_near || int'(ndelta) != exp_nd) begin
        failures++;
        $display("FAIL: round %0d nearest %0d/%0d exp %0d/%0d", round, nearest, ndelta, exp_near, exp_nd);
      end
      // extract
      expd = {};
      for (int i = 0; i < int'(D); i++)
        if (on(i) && q[i / CW][i % CW] != cache[exp_near][i / CW][i % CW]) expd.push_back(i);
      pushed = {};
      ext_start = 1;
      @(negedge clk) ext_start = 0;
      while (ext_busy) @(negedge clk);
      checks++;
      if (pushed != expd) begin
        failures++;
        $display("FAIL: round %0d pushed %0d indices, exp %0d", round, pushed.size(), expd.size());
      end
      // query buffer port
      for (int c = 0; c < int'(NCH); c++) begin
        @(negedge clk) qb_rd_en = 1; qb_rd_chunk = 3'(c);
        @(negedge clk) qb_rd_en = 0;
        checks++;
        if (qb_rd_data != q[c]) begin failures++; $display("FAIL: qbuf chunk %0d", c); end
      end
    end
    // bind: buffer ^= data
    @(negedge clk) q_valid = 1; q_bind = 1; q_chunk = 3'd5; q_data = 32'hdead_beef;
    @(negedge clk) q_valid = 0; q_bind = 0; qb_rd_en = 1; qb_rd_chunk = 3'd5;
    @(negedge clk) qb_rd_en = 0;
    checks++;
    if (qb_rd_data != (q[5] ^ 32'hdead_beef)) begin failures++; $display("FAIL: bind"); end
    @(negedge clk) find = 1;
    @(negedge clk) find = 0;
    checks++;
    if (found) begin failures++; $display("FAIL: distances not voided by bind"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
