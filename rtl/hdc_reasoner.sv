// hdc_reasoner: the lightweight HDC graph reasoner. For a fixed task its
// weights w_j = cos(g_P, h_j) are precomputed (g_P = t bound with the relation
// hypervectors of a k-hop path) and held on chip as signed Q.7 values. At run
// time it is a vector multiply: s^_j = s_j * w_j, rounded to Q.7 and saturated,
// one product per lane per cycle (W lanes, ceil(M/W) cycles), followed by an
// arg-max over the products that gives the object's winning class and score.
// Weights are written by the host one class at a time, or all at once from a
// score vector (when the prompt changes online, the aligner scores the prompt
// vector as a query and those scores become the weights, as the paper
// suggests). The multiply, rounding, saturation and on-chip weights follow the
// paper; the Q.7 format, round-half-up and the arg-max output are this design's.
module hdc_reasoner #(
  parameter int unsigned M = torr_pkg::M_DEF,
  parameter int unsigned W = torr_pkg::W_DEF,
  localparam int unsigned G    = (M + W - 1) / W,
  localparam int unsigned IDXW = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // weight memory
  input  logic               w_wr_en,
  input  logic [IDXW-1:0]    w_wr_idx,
  input  logic signed [7:0]  w_wr_data,
  input  logic               w_load_all,
  input  logic signed [7:0]  w_load_vec [G*W],
  // run
  input  logic               start,
  input  logic signed [7:0]  scores [G*W],
  output logic               busy,
  output logic               done,       // one-cycle pulse
  output logic [IDXW-1:0]    best_cls,
  output logic signed [7:0]  best_val
);
  logic signed [7:0] w [G*W];
  logic [IDXW-1:0]   grp;
  logic              run;

  function automatic logic signed [7:0] mul_q7(input logic signed [7:0] a, input logic signed [7:0] b);
    logic signed [16:0] p;
    p = (17'(a) * 17'(b) + 17'sd64) >>> 7;
    if (p > 17'sd127)       return 8'sh7f;
    else if (p < -17'sd128) return 8'sh80;
    else                    return 8'(p);
  endfunction

  // W products and their arg-max for the current group
  logic signed [7:0] g_best;
  logic [IDXW-1:0]   g_cls;
  logic              g_any;
  always_comb begin
    logic signed [7:0] p;
    g_best = '0;
    g_cls  = '0;
    g_any  = 1'b0;
    for (int l = 0; l < int'(W); l++) begin
      p = mul_q7(scores[int'(grp) * W + l], w[int'(grp) * W + l]);
      if ((int'(grp) * W + l) < int'(M) && (!g_any || p > g_best)) begin
        g_best = p;
        g_cls  = IDXW'(int'(grp) * W + l);
        g_any  = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(G*W); i++) w[i] <= '0;
    end else if (w_load_all) begin
      w <= w_load_vec;
    end else if (w_wr_en) begin
      w[int'(w_wr_idx)] <= w_wr_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run      <= 1'b0;
      grp      <= '0;
      done     <= 1'b0;
      best_cls <= '0;
      best_val <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        run <= 1'b1;
        grp <= '0;
      end else if (run) begin
        if (grp == '0 || g_best > best_val) begin
          best_val <= g_best;
          best_cls <= g_cls;
        end
        grp <= grp + 1'b1;
        if (grp == IDXW'(G - 1)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign busy = run;
endmodule
