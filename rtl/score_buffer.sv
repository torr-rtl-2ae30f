// score_buffer: turns the aligner's integer accumulators into normalised
// scores and pools the top-k. Each cycle one class j is normalised,
// s_j = acc_j / D' in signed Q.7 (an arithmetic right shift by log2 D' - 7,
// saturated; at int4 precision by log2 D' - 3 to a 4-bit value, then placed in
// the upper nibble so every consumer sees Q.7), stored in the score vector and
// fed to the top-k sorter. After M cycles it presents the top-k class key and
// the margin top1 - top2 (also quantised by dropping MDROP LSBs) used by the
// reasoning gate. Normalisation by a shift, int8/int4 precision and the
// top-k key with margin follow the paper; one class per cycle, the Q.7 format,
// truncating shift with saturation and the margin definition are this design's.
module score_buffer #(
  parameter int unsigned M     = torr_pkg::M_DEF,
  parameter int unsigned W     = torr_pkg::W_DEF,
  parameter int unsigned ACCW  = $clog2(torr_pkg::D_DEF) + 2,
  parameter int unsigned TOPK  = torr_pkg::TOPK_DEF,
  parameter int unsigned MDROP = torr_pkg::MDROP_DEF,
  parameter int unsigned SW    = $clog2(torr_pkg::D_DEF) + 1,
  localparam int unsigned G    = (M + W - 1) / W,
  localparam int unsigned IDXW = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic signed [ACCW-1:0] acc_i [G*W],
  input  logic [SW-1:0]          shift,
  input  logic                   prec_int4,
  output logic                   busy,
  output logic                   done,         // one-cycle pulse
  output logic signed [7:0]      scores [G*W], // classes >= M read as 0
  output logic [IDXW-1:0]        key [TOPK],
  output logic signed [7:0]      top1,
  output logic [7:0]             margin,
  output logic [7:0]             margin_q
);
  logic [IDXW:0]         j;
  logic                  run;
  logic signed [7:0]     s_c;
  logic signed [7:0]     tv [TOPK];
  logic [TOPK-1:0]       tvld;

  function automatic logic signed [7:0] normalise(input logic signed [ACCW-1:0] a,
                                                  input logic [SW-1:0] sh, input logic i4);
    logic signed [ACCW-1:0] v;
    if (i4) begin
      v = a >>> (sh - SW'(3));
      if (v > ACCW'(signed'(7)))        return 8'sh70;
      else if (v < ACCW'(signed'(-8)))  return 8'sh80;
      else                              return 8'(v) <<< 4;
    end else begin
      v = a >>> (sh - SW'(7));
      if (v > ACCW'(signed'(127)))       return 8'sh7f;
      else if (v < ACCW'(signed'(-128))) return 8'sh80;
      else                               return 8'(v);
    end
  endfunction

  assign s_c = normalise(acc_i[int'(j)], shift, prec_int4);

  topk_sorter #(.TOPK(TOPK), .VW(8), .IDXW(IDXW)) u_sorter (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (start),
    .in_valid(run),
    .in_val  (s_c),
    .in_idx  (j[IDXW-1:0]),
    .top_val (tv),
    .top_idx (key),
    .top_vld (tvld)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      j    <= '0;
      done <= 1'b0;
      for (int i = 0; i < int'(G*W); i++) scores[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        run <= 1'b1;
        j   <= '0;
      end else if (run) begin
        scores[int'(j)] <= s_c;
        j <= j + 1'b1;
        if (j == (IDXW+1)'(M - 1)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign busy     = run;
  assign top1     = tv[0];
  assign margin   = (TOPK > 1 && tvld[1]) ? 8'(tv[0] - tv[1]) : 8'd255;
  assign margin_q = margin >> MDROP;
endmodule
