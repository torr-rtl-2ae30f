// tb_torr_model.svh: host-side driver tasks and the reference model of the
// accelerator, shared by the end-to-end testbenches of torr_top. The including
// module declares the sizes (D, B, M, W, K, CW, NOBJ, TOPK, FIFO, G, BANKW, NCH,
// WATCHDOG), the clock, reset, the command/DMA signals and the instance dut.
// The model is behavioural (plain loops over bit arrays): full bipolar dot
// products, the int8/int4 normalisation, a stable top-k, the path rules written
// with real arithmetic, the query-cache replacement and the output cache.
// run_query predicts and checks every field of a query's DMA result record (and
// the score dump when enabled). Because the model always computes the full dot
// product, every delta-path result also checks that the +/-2 sparse update is
// exact. Full-path latency is checked against D' * ceil(M/W), delta-path
// latency against |Delta| * ceil(M/W) (lower bound) and the full cost (upper).
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model state ----------------
  bit              h   [M][D];
  int              w   [M];
  bit              qc_hv [K][D];
  bit [B-1:0]      qc_mask [K];
  bit              qc_v [K];
  int              victim = 0;
  bit              oc_v [NOBJ];
  int              oc_key [NOBJ][TOPK];
  int              oc_mq [NOBJ];
  int              oc_cls [NOBJ];
  int              oc_sc [NOBJ];
  int              tau_byp = 230, tau_g = 128, n_hi = 4, q_hi = 4, dbudget = D / 8;
  longint          budget = 64'hffff_ffff;
  bit              int4 = 0, reason_en = 1, dump = 0, psu_off = 0;
  bit [B-1:0]      mask;
  int              nb, shift_m;
  bit              high;
  // mechanism counters
  int c_full, c_delta, c_byp, c_gate, c_gated_banks, c_int4, c_alonly, c_wjob, c_dump, c_psu_off;

  // ---------------- host commands ----------------
  task automatic cmd(input op_e op, input int unsigned addr, input logic [63:0] data);
    @(posedge clk); #1;
    cmd_valid = 1; cmd_op = op; cmd_addr = addr; cmd_data = data;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
  endtask

  task automatic set_cfg(input logic [3:0] r, input int unsigned v);
    cmd(OP_CFG, 32'(r), 64'(v));
  endtask

  function automatic int norm(input int a, input int sh, input bit i4);
    int v;
    if (i4) begin
      v = a >>> (sh - 3);
      if (v > 7) v = 7;
      if (v < -8) v = -8;
      return v * 16;
    end
    v = a >>> (sh - 7);
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

  function automatic int dot(input bit q[D], input int j);
    int s = 0;
    for (int i = 0; i < int'(D); i++)
      if (mask[i / BANKW]) s += (q[i] == h[j][i]) ? 1 : -1;
    return s;
  endfunction

  task automatic open_window(input int n, input int qd);
    longint cost;
    nb = 0;
    for (int l = 0; (1 << l) <= int'(B); l++) begin
      cost = longint'(n) * BANKW * G * (1 << l);
      if (cost <= budget) nb = l;
    end
    mask = '0;
    for (int b = 0; b < (1 << nb); b++) mask[b] = 1;
    shift_m = $clog2(BANKW) + nb;
    high = (n >= n_hi) || (qd >= q_hi);
    cmd(OP_WINDOW, 0, {32'd0, 16'(qd), 16'(n)});
  endtask

  task automatic load_query(input bit q[D], input bit do_bind);
    logic [63:0] d;
    for (int c = 0; c < int'(NCH); c++) begin
      d = '0;
      for (int b = 0; b < int'(CW); b++) d[b] = q[c * CW + b];
      cmd(do_bind ? OP_QBIND : OP_QUERY, c, d);
    end
  endtask

  // run a query for object o and check the result record
  task automatic run_query(input bit q[D], input int o, input string tag);
    path_e p_exp;
    int hd, best, nd, s[M], key[TOPK], margin, mq, cls, sc, lat;
    bit found, used[M], reuse;
    real rho;
    result_t r;
    load_query(q, 0);
    // nearest cached query with the same mask
    found = 0; best = 0; nd = 0;
    for (int k = 0; k < int'(K); k++) begin
      if (!qc_v[k] || qc_mask[k] != mask) continue;
      hd = 0;
      for (int i = 0; i < int'(D); i++) if (mask[i / BANKW] && q[i] != qc_hv[k][i]) hd++;
      if (!found || hd < nd) begin found = 1; best = k; nd = hd; end
    end
    if (psu_off) found = 0;           // reuse disabled: cached queries are not offered
    rho = 1.0 - 2.0 * nd / real'((1 << shift_m));
    if (found && rho >= tau_byp / 256.0 && high && oc_v[o]) p_exp = PATH_BYPASS;
    else if (found && rho >= tau_g / 256.0 && nd <= dbudget) p_exp = PATH_DELTA;
    else p_exp = PATH_FULL;
    // scores, top-k, margin
    for (int j = 0; j < int'(M); j++) begin s[j] = norm(dot(q, j), shift_m, int4); used[j] = 0; end
    for (int t = 0; t < int'(TOPK); t++) begin
      int bj = -1;
      for (int j = 0; j < int'(M); j++) if (!used[j] && (bj < 0 || s[j] > s[bj])) bj = j;
      used[bj] = 1; key[t] = bj;
    end
    margin = (s[key[0]] - s[key[1]]) & 255;
    mq = margin >> MDROP_DEF;
    reuse = 0;
    if (p_exp == PATH_BYPASS) begin
      reuse = 1; cls = oc_cls[o]; sc = oc_sc[o];
    end else if (!reason_en) begin
      cls = key[0]; sc = s[key[0]];
    end else if (oc_v[o] && oc_key[o] == key && oc_mq[o] == mq) begin
      reuse = 1; cls = oc_cls[o]; sc = oc_sc[o];
    end else begin
      int bv = 0;
      cls = -1;
      for (int j = 0; j < int'(M); j++) begin
        int p = (s[j] * w[j] + 64) >>> 7;
        if (p > 127) p = 127;
        if (p < -128) p = -128;
        if (cls < 0 || p > bv) begin bv = p; cls = j; end
      end
      sc = bv;
    end
    // issue the run and time it
    cmd(OP_RUN, o, 0);
    lat = 0;
    while (!dma_valid) begin @(posedge clk); lat++; end
    r = result_t'(dma_data);
    // score dump: ceil(M/8) words of aligner scores at the following addresses
    if (dump && p_exp != PATH_BYPASS) begin
      logic [31:0] a0;
      bit ok;
      a0 = dma_addr;
      ok = 1;
      for (int n = 0; n < int'((M + 7) / 8); n++) begin
        @(posedge clk);
        while (!dma_valid) @(posedge clk);
        if (dma_addr != a0 + 32'(8 * (n + 1))) ok = 0;
        for (int b = 0; b < 8; b++)
          if (n * 8 + b < int'(M) && int'($signed(dma_data[8*b +: 8])) != s[n * 8 + b]) ok = 0;
      end
      check(ok, $sformatf("%s score dump", tag));
      c_dump++;
    end
    check(r.path == 2'(p_exp), $sformatf("%s path %0d exp %0d (nd=%0d found=%0d)", tag, r.path, p_exp, nd, found));
    check(r.obj == 8'(o), $sformatf("%s obj", tag));
    check(r.reused == reuse, $sformatf("%s reused %0d exp %0d", tag, r.reused, reuse));
    check(int'(r.cls) == cls, $sformatf("%s cls %0d exp %0d", tag, r.cls, cls));
    check(int'($signed(r.score)) == sc, $sformatf("%s score %0d exp %0d", tag, $signed(r.score), sc));
    check(r.nbanks_l2 == 5'(nb), $sformatf("%s nbanks", tag));
    if (found) begin
      check(int'(r.ndelta) == nd, $sformatf("%s ndelta %0d exp %0d", tag, r.ndelta, nd));
      check($signed(r.rho) == 10'((((1 << shift_m) - 2 * nd) * 256) >>> shift_m), $sformatf("%s rho", tag));
    end
    if (p_exp == PATH_FULL) begin
      int dp = 1 << shift_m;
      check(lat >= dp * int'(G) && lat <= dp * int'(G) + int'(M) + int'(B) + 40,
            $sformatf("%s full latency %0d vs D'*G=%0d", tag, lat, dp * G));
    end
    if (p_exp == PATH_DELTA)
      check(lat >= nd * int'(G) && lat < (1 << shift_m) * int'(G),
            $sformatf("%s delta latency %0d (|Delta|=%0d)", tag, lat, nd));
    $display("%-12s obj=%0d path=%0d reused=%0d nd=%0d cls=%0d score=%0d lat=%0d",
             tag, o, r.path, r.reused, r.ndelta, r.cls, int'($signed(r.score)), lat);
    // model updates
    case (p_exp)
      PATH_FULL:   c_full++;
      PATH_DELTA:  c_delta++;
      default:     c_byp++;
    endcase
    if (p_exp != PATH_BYPASS && reuse) c_gate++;
    if (nb < $clog2(B)) c_gated_banks++;
    if (int4) c_int4++;
    if (!reason_en) c_alonly++;
    if (psu_off) c_psu_off++;
    if (p_exp != PATH_BYPASS) begin
      if (!reuse) begin
        oc_v[o] = 1; oc_key[o] = key; oc_mq[o] = mq; oc_cls[o] = cls; oc_sc[o] = sc;
      end
      qc_hv[victim] = q; qc_mask[victim] = mask; qc_v[victim] = 1;
      victim = (victim + 1) % K;
    end
    @(posedge clk);
  endtask

  task automatic flip(inout bit q[D], input int n);
    int i;
    for (int f = 0; f < n; f++) begin
      i = $urandom_range(D / B * (1 << nb) - 1, 0);
      q[i] = !q[i];
    end
  endtask

  // reset release, thresholds, random concept hypervectors and task weights
  task automatic init_design();
    logic [63:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // configuration
    set_cfg(CFG_TAU_BYP, tau_byp);
    set_cfg(CFG_TAU_G, tau_g);
    set_cfg(CFG_N_HI, n_hi);
    set_cfg(CFG_Q_HI, q_hi);
    set_cfg(CFG_DBUDGET, dbudget);
    set_cfg(CFG_BUDGET, 32'(budget));
    set_cfg(CFG_MODE, 2);
    // item memory and task weights
    for (int j = 0; j < int'(M); j++)
      for (int i = 0; i < int'(D); i++) h[j][i] = 1'($urandom);
    for (int i = 0; i < int'(D); i++)
      for (int gg = 0; gg < int'(G); gg++) begin
        d = '0;
        for (int l = 0; l < int'(W); l++) if (gg * W + l < M) d[l] = h[gg * W + l][i];
        cmd(OP_IMEM, i * G + gg, d);
      end
    for (int j = 0; j < int'(M); j++) begin
      w[j] = int'($urandom_range(255, 0)) - 128;
      cmd(OP_WMEM, j, 64'(w[j] & 255));
    end
    for (int k = 0; k < int'(K); k++) qc_v[k] = 0;
    for (int o = 0; o < int'(NOBJ); o++) oc_v[o] = 0;
  endtask
