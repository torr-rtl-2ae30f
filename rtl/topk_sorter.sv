// topk_sorter: keeps the TOPK largest signed scores seen since the last clear,
// in descending order, together with their class indices. One score enters per
// cycle; every slot compares the new score with its own and its upper
// neighbour's value in parallel (a systolic insertion sorter), so the list is
// always sorted after the clock edge. Ties keep the earlier entry first. The
// paper lists a sorter and a top-k score buffer but not how they work; the
// insertion structure is this design's choice.
module topk_sorter #(
  parameter int unsigned TOPK = torr_pkg::TOPK_DEF,
  parameter int unsigned VW   = 8,
  parameter int unsigned IDXW = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 in_valid,
  input  logic signed [VW-1:0] in_val,
  input  logic [IDXW-1:0]      in_idx,
  output logic signed [VW-1:0] top_val [TOPK],
  output logic [IDXW-1:0]      top_idx [TOPK],
  output logic [TOPK-1:0]      top_vld
);
  logic [TOPK-1:0]        beats;     // new value belongs above slot i's current value
  logic [TOPK-1:0]        beats_up;  // ... and above slot i-1's (never for slot 0)
  logic signed [VW-1:0]   up_val [TOPK];
  logic [IDXW-1:0]        up_idx [TOPK];
  logic [TOPK-1:0]        up_vld;

  always_comb begin
    for (int i = 0; i < TOPK; i++)
      beats[i] = !top_vld[i] || (in_val > top_val[i]);
    beats_up  = {beats[TOPK-2:0], 1'b0};
    up_vld    = {top_vld[TOPK-2:0], 1'b0};
    up_val[0] = '0;
    up_idx[0] = '0;
    for (int i = 1; i < TOPK; i++) begin
      up_val[i] = top_val[i-1];
      up_idx[i] = top_idx[i-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      top_vld <= '0;
      for (int i = 0; i < TOPK; i++) begin
        top_val[i] <= '0;
        top_idx[i] <= '0;
      end
    end else if (clear) begin
      top_vld <= '0;
    end else if (in_valid) begin
      for (int i = 0; i < TOPK; i++) begin
        if (beats[i]) begin
          if (!beats_up[i]) begin
            top_val[i] <= in_val;             // insert here
            top_idx[i] <= in_idx;
            top_vld[i] <= 1'b1;
          end else begin
            top_val[i] <= up_val[i];          // shift down from above
            top_idx[i] <= up_idx[i];
            top_vld[i] <= up_vld[i];
          end
        end
      end
    end
  end
endmodule
