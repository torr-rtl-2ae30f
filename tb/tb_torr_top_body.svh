// tb_torr_top_body.svh: end-to-end scenario shared by the reduced-size and
// the full-size testbenches of torr_top; the driver tasks and the reference
// model come from tb_torr_model.svh. The scenario makes each mechanism happen:
// full, delta, bypass, reasoning-gate reuse, FIFO back-pressure, bank gating
// (D' < D), int4 precision, aligner-only output, the score-vector dump, PSU
// off and an online weight recompute from a bound prompt vector; a mechanism
// that never occurs counts as a failure.
  `include "tb_torr_model.svh"

  bit qa[D], qb[D], qc[D], p1[D], p2[D], g[D];

  initial begin
    init_design();

    // window 1: low load, all banks
    open_window(2, 0);
    for (int i = 0; i < int'(D); i++) begin qa[i] = 1'($urandom); qc[i] = 1'($urandom); end
    run_query(qa, 0, "full-A");
    run_query(qa, 0, "delta-0");       // same query again: gate reuse
    qb = qa; flip(qb, 10);
    run_query(qb, 0, "delta-10");
    qb = qa;
    for (int i = CW; i < int'(CW + 4 * FIFO); i++) qb[i] = !qb[i];
    run_query(qb, 1, "delta-burst");   // a dense run of flips: the FIFO fills
    run_query(qc, 2, "full-C");
    // window 2: high load (N >= N_hi): bypass
    open_window(6, 0);
    qb = qa; flip(qb, 3);
    run_query(qb, 0, "bypass");
    qb = qc; flip(qb, D / 5);
    run_query(qb, 2, "full-far");
    // window 3: tight budget gates banks (D' = D/2)
    budget = 2 * BANKW * G * 2;
    set_cfg(CFG_BUDGET, 32'(budget));
    open_window(2, 0);
    run_query(qa, 3, "gated-full");
    qb = qa; flip(qb, 5);
    run_query(qb, 3, "gated-delta");
    // window 4: int4 precision, then aligner-only output
    budget = 64'hffff_ffff;
    set_cfg(CFG_BUDGET, 32'(budget));
    int4 = 1;
    dump = 1;
    set_cfg(CFG_MODE, 7);
    open_window(1, 0);
    run_query(qc, 4, "int4");
    int4 = 0; reason_en = 0;
    set_cfg(CFG_MODE, 4);
    open_window(1, 0);
    run_query(qa, 5, "aligner-only");
    reason_en = 1; dump = 0;
    psu_off = 1;
    set_cfg(CFG_MODE, 10);
    run_query(qa, 5, "psu-off");     // same query again, but reuse disabled: full
    psu_off = 0;
    set_cfg(CFG_MODE, 2);
    // window 5: online prompt change: g = p1 (x) p2, weights = cos(g, h_j)
    open_window(1, 0);
    for (int i = 0; i < int'(D); i++) begin p1[i] = 1'($urandom); p2[i] = 1'($urandom); g[i] = p1[i] ^ p2[i]; end
    load_query(p1, 0);
    load_query(p2, 1);
    cmd(OP_RUN, 0, 64'd1);
    while (!cmd_ready) @(posedge clk);
    for (int j = 0; j < int'(M); j++) w[j] = norm(dot(g, j), shift_m, 0);
    for (int o = 0; o < int'(NOBJ); o++) oc_v[o] = 0;
    c_wjob++;
    run_query(qa, 0, "new-task");
    check(dut.u_reason.w[3] == 8'(w[3]), "recomputed weight 3");
    // mechanisms
    check(c_full > 0, "full path never taken");
    check(c_delta > 0, "delta path never taken");
    check(c_byp > 0, "bypass never taken");
    check(c_gate > 0, "reasoning gate never reused");
    check(n_fifo_stall > 0, "Delta FIFO never full");
    check(c_gated_banks > 0, "bank gating never used");
    check(c_int4 > 0 && c_alonly > 0 && c_wjob > 0 && c_dump > 0 && c_psu_off > 0,
          "int4 / aligner-only / weight job / score dump / PSU off");
    check(n_full == 32'(c_full) && n_delta == 32'(c_delta) && n_bypass == 32'(c_byp)
          && n_gate_reuse == 32'(c_gate), "event counters");
    $display("mechanisms: full=%0d delta=%0d bypass=%0d gate_reuse=%0d fifo_stall_cycles=%0d gated=%0d int4=%0d aligner_only=%0d weight_jobs=%0d score_dumps=%0d psu_off=%0d",
             c_full, c_delta, c_byp, c_gate, n_fifo_stall, c_gated_banks, c_int4, c_alonly, c_wjob, c_dump, c_psu_off);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
