// item_memory: banked, bit-sliced store of the M concept hypervectors.
// The memory is column-major: one word holds bit i of a group of W classes, so
// streaming column i delivers h_{j,i} to W aligner lanes at once (the paper's
// "one column per cycle", broadcast to W class lanes). Dimensions are split into
// B banks of D/B consecutive columns; a bank whose enable bit is clear is not
// read (its output is zero and rd_gated is raised), which realises the
// effective dimension D' by bank gating. Banking and gating follow the paper;
// the column-major word layout, one synchronous read port with one cycle of
// latency and the separate host write port are this design's choices.
// Classes beyond M in the last group are padding and never written.
module item_memory #(
  parameter int unsigned D = torr_pkg::D_DEF,
  parameter int unsigned B = torr_pkg::B_DEF,
  parameter int unsigned M = torr_pkg::M_DEF,
  parameter int unsigned W = torr_pkg::W_DEF,
  localparam int unsigned G     = (M + W - 1) / W,
  localparam int unsigned BANKW = D / B,
  localparam int unsigned IW    = $clog2(D),
  localparam int unsigned GW    = (G > 1) ? $clog2(G) : 1,
  localparam int unsigned BW    = (B > 1) ? $clog2(B) : 1
) (
  input  logic          clk,
  // read port (aligner)
  input  logic          rd_en,
  input  logic [IW-1:0] rd_col,
  input  logic [GW-1:0] rd_grp,
  input  logic [B-1:0]  bank_en,
  output logic [W-1:0]  rd_data,   // valid the cycle after rd_en
  output logic          rd_gated,  // the read hit a disabled bank
  // write port (host)
  input  logic          wr_en,
  input  logic [IW-1:0] wr_col,
  input  logic [GW-1:0] wr_grp,
  input  logic [W-1:0]  wr_data
);
  localparam int unsigned LW = $clog2(BANKW * G);

  logic [B-1:0][W-1:0] bank_q;
  logic [BW-1:0]       rd_bank_q;
  logic                rd_on_q;

  function automatic logic [BW-1:0] bank_of(input logic [IW-1:0] col);
    return BW'(int'(col) / int'(BANKW));
  endfunction

  function automatic logic [LW-1:0] local_addr(input logic [IW-1:0] col, input logic [GW-1:0] grp);
    return LW'((int'(col) % int'(BANKW)) * int'(G) + int'(grp));
  endfunction

  for (genvar b = 0; b < B; b++) begin : g_bank
    logic [W-1:0] mem [BANKW * G];
    always_ff @(posedge clk) begin
      if (wr_en && bank_of(wr_col) == BW'(b))
        mem[local_addr(wr_col, wr_grp)] <= wr_data;
      if (rd_en && bank_en[b] && bank_of(rd_col) == BW'(b))
        bank_q[b] <= mem[local_addr(rd_col, rd_grp)];
    end
  end

  always_ff @(posedge clk) begin
    rd_bank_q <= bank_of(rd_col);
    rd_on_q   <= rd_en && bank_en[bank_of(rd_col)];
  end

  assign rd_data  = rd_on_q ? bank_q[rd_bank_q] : '0;
  assign rd_gated = !rd_on_q;
endmodule
