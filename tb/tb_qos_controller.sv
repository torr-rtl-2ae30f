// tb_qos_controller: checks the window controls and the path policy against
// Algorithm 1 written with real arithmetic. For random object counts, queue
// depths and budgets it checks the bank mask (largest power-of-two bank count
// whose full-scan cost fits the budget), log2 D', precision and the high-load
// predicate; for random |Delta| it checks the chosen path and rho.
module tb_qos_controller;
  import torr_pkg::*;
  localparam int unsigned D = 1024, B = 8, M = 32, W = 16, G = 2, BANKW = D / B;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  logic win_start = 0, decide = 0, found = 0, out_valid = 0, prec_int4, high_load;
  logic [15:0] n_obj = '0, q_depth = '0, ndelta = '0;
  logic [B-1:0] bank_en;
  logic [4:0] nbanks_l2;
  logic [10:0] shift;
  path_e path;
  logic signed [RHOW-1:0] rho_q;
  int checks = 0, failures = 0;

  qos_controller #(.D(D), .B(B), .M(M), .W(W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nb, n, qd, dp, nd;
    path_e exp_path;
    bit hi;
    real rho;
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 60; w++) begin
      @(negedge clk);
      cfg.tau_byp   = 16'($urandom_range(256, 180));
      cfg.tau_g     = 16'($urandom_range(200, 0));
      cfg.n_hi      = 16'($urandom_range(20, 1));
      cfg.q_hi      = 16'($urandom_range(8, 1));
      cfg.budget    = 32'($urandom_range(200000, 1000));
      cfg.dbudget   = 16'($urandom_range(300, 10));
      cfg.prec_int4 = 1'($urandom);
      n  = $urandom_range(30, 1);
      qd = $urandom_range(10, 0);
      n_obj = 16'(n); q_depth = 16'(qd); win_start = 1;
      @(negedge clk) win_start = 0;
      nb = 0;
      for (int l = 0; (1 << l) <= int'(B); l++) if (longint'(n) * BANKW * G * (1 << l) <= longint'(cfg.budget)) nb = l;
      hi = (n >= cfg.n_hi) || (qd >= cfg.q_hi);
      dp = BANKW << nb;
      checks++;
      if (int'(nbanks_l2) != nb || bank_en != B'((1 << (1 << nb)) - 1) || int'(shift) != $clog2(dp)
          || high_load != hi || prec_int4 != cfg.prec_int4) begin
        failures++;
        $display("FAIL: window n=%0d budget=%0d nb_l2 %0d exp %0d mask %b", n, cfg.budget, nbanks_l2, nb, bank_en);
      end
      for (int qn = 0; qn < 20; qn++) begin
        @(negedge clk);
        nd = (qn < 10) ? $urandom_range(dp / 8, 0) : $urandom_range(dp, 0);
        found = 1'($urandom_range(9, 0) != 0);
        out_valid = 1'($urandom);
        ndelta = 16'(nd); decide = 1;
        @(negedge clk) decide = 0;
        rho = 1.0 - 2.0 * nd / dp;
        if (found && rho >= $signed(cfg.tau_byp[RHOW-1:0]) / 256.0 && hi && out_valid) exp_path = PATH_BYPASS;
        else if (found && rho >= $signed(cfg.tau_g[RHOW-1:0]) / 256.0 && nd <= cfg.dbudget) exp_path = PATH_DELTA;
        else exp_path = PATH_FULL;
        checks++;
        if (path != exp_path || (found && int'(rho_q) != int'($floor(rho * 256.0)))) begin
          failures++;
          $display("FAIL: nd=%0d dp=%0d found=%0d path %0d exp %0d rho %0d exp %f", nd, dp, found, path, exp_path, rho_q, rho * 256.0);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
