// output_cache: one entry per object slot holding the last output produced for
// that object (winning class and final score) together with the top-k key and
// quantised margin that produced it. The reasoning gate compares a new window's
// key and margin against this entry, and the bypass path returns the entry
// unchanged. The output cache and its reuse follow the paper (an (N,1) cache);
// the entry contents, the combinational read and the invalidate-all on a task
// change are this design's choices.
module output_cache #(
  parameter int unsigned NOBJ = torr_pkg::NOBJ_DEF,
  parameter int unsigned TOPK = torr_pkg::TOPK_DEF,
  parameter int unsigned IDXW = 8,
  parameter int unsigned MQW  = 8,
  localparam int unsigned OW  = $clog2(NOBJ)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 inv_all,        // task changed: drop every entry
  // read port (combinational)
  input  logic [OW-1:0]        rd_obj,
  output logic                 rd_valid,
  output logic [IDXW-1:0]      rd_key [TOPK],
  output logic [MQW-1:0]       rd_margin,
  output logic [IDXW-1:0]      rd_cls,
  output logic signed [7:0]    rd_score,
  // write port
  input  logic                 wr_en,
  input  logic [OW-1:0]        wr_obj,
  input  logic [IDXW-1:0]      wr_key [TOPK],
  input  logic [MQW-1:0]       wr_margin,
  input  logic [IDXW-1:0]      wr_cls,
  input  logic signed [7:0]    wr_score
);
  logic [NOBJ-1:0]        valid;
  logic [IDXW-1:0]        key    [NOBJ][TOPK];
  logic [MQW-1:0]         margin [NOBJ];
  logic [IDXW-1:0]        cls    [NOBJ];
  logic signed [7:0]      score  [NOBJ];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       valid <= '0;
    else if (inv_all) valid <= '0;
    else if (wr_en)   valid[wr_obj] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      key[wr_obj]    <= wr_key;
      margin[wr_obj] <= wr_margin;
      cls[wr_obj]    <= wr_cls;
      score[wr_obj]  <= wr_score;
    end
  end

  assign rd_valid  = valid[rd_obj];
  assign rd_key    = key[rd_obj];
  assign rd_margin = margin[rd_obj];
  assign rd_cls    = cls[rd_obj];
  assign rd_score  = score[rd_obj];
endmodule
