// qos_controller: the FPS/QoS controller. It implements the path policy of the
// paper's Algorithm 1 and its window-level controls.
//  * Window controls, latched once per window (win_start): the active bank
//    mask (effective dimension D'), the normalisation shift log2 D', the score
//    precision (int8/int4) and the high-load predicate H = (N >= N_hi) or
//    (q >= q_hi).
//  * D' choice: the largest power-of-two number of banks nb for which the
//    window's N queries fit the cycle budget, N * nb*(D/B) * ceil(M/W) <= budget
//    (the aligner's full-scan latency); at least one bank. The paper says only
//    "choose D' (bank gating) to meet FPS given N, q"; the budget rule, the
//    prefix-shaped mask and the host-set precision bit are this design's.
//  * Path per query (decide): bypass if a comparable cached query exists,
//    rho >= tau_byp, H holds and the object has a cached output; else delta if
//    rho >= tau_g and |Delta| is within the delta budget; else full. rho is
//    compared exactly: rho >= tau  <=>  (D' - 2|Delta|) * 2^8 >= tau_q * D'.
// All outputs are registered; decide produces path one cycle later.
module qos_controller
  import torr_pkg::*;
#(
  parameter int unsigned D = torr_pkg::D_DEF,
  parameter int unsigned B = torr_pkg::B_DEF,
  parameter int unsigned M = torr_pkg::M_DEF,
  parameter int unsigned W = torr_pkg::W_DEF,
  localparam int unsigned G     = (M + W - 1) / W,
  localparam int unsigned BANKW = D / B,
  localparam int unsigned LB    = $clog2(B),
  localparam int unsigned SW    = $clog2(D) + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cfg_t                   cfg,
  // window start
  input  logic                   win_start,
  input  logic [15:0]            n_obj,
  input  logic [15:0]            q_depth,
  output logic [B-1:0]           bank_en,
  output logic [4:0]             nbanks_l2,
  output logic [SW-1:0]          shift,      // log2 D'
  output logic                   prec_int4,
  output logic                   high_load,
  // per query decision
  input  logic                   decide,
  input  logic                   found,      // a cached query with the same D' exists
  input  logic [15:0]            ndelta,     // |Delta| against it
  input  logic                   out_valid,  // output cache holds this object
  output path_e                  path,
  output logic signed [RHOW-1:0] rho_q       // signed Q.8 similarity
);
  // ---------------- window controls ----------------
  logic [4:0] nb_l2_sel;

  always_comb begin
    logic [63:0] cost;
    nb_l2_sel = '0;
    for (int l = 0; l <= int'(LB); l++) begin
      cost = 64'(n_obj) * 64'(BANKW) * 64'(G) << l;
      if (cost <= 64'(cfg.budget)) nb_l2_sel = 5'(l);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_en   <= '1;
      nbanks_l2 <= 5'(LB);
      shift     <= SW'($clog2(D));
      prec_int4 <= 1'b0;
      high_load <= 1'b0;
    end else if (win_start) begin
      for (int b = 0; b < B; b++) bank_en[b] <= (b < (1 << nb_l2_sel));
      nbanks_l2 <= nb_l2_sel;
      shift     <= SW'($clog2(BANKW)) + SW'(nb_l2_sel);
      prec_int4 <= cfg.prec_int4;
      high_load <= (n_obj >= cfg.n_hi) || (q_depth >= cfg.q_hi);
    end
  end

  // ---------------- path policy ----------------
  logic signed [31:0] dprime, lhs, rhs_byp, rhs_g;
  logic               ge_byp, ge_g;
  path_e              path_c;

  always_comb begin
    dprime  = 32'sd1 <<< shift;
    lhs     = (dprime - 2 * $signed({16'd0, ndelta})) <<< RHO_FRAC;
    rhs_byp = 32'($signed(cfg.tau_byp[RHOW-1:0])) * dprime;
    rhs_g   = 32'($signed(cfg.tau_g[RHOW-1:0])) * dprime;
    ge_byp  = found && (lhs >= rhs_byp);
    ge_g    = found && (lhs >= rhs_g);
    if (ge_byp && high_load && out_valid)             path_c = PATH_BYPASS;
    else if (ge_g && (ndelta <= cfg.dbudget))         path_c = PATH_DELTA;
    else                                              path_c = PATH_FULL;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      path  <= PATH_FULL;
      rho_q <= '0;
    end else if (decide) begin
      path  <= path_c;
      rho_q <= found ? RHOW'(lhs >>> shift) : RHOW'(-(1 <<< RHO_FRAC));
    end
  end
endmodule
