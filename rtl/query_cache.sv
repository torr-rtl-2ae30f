// query_cache: the last K query hypervectors, each with the per-class integer
// accumulators (its unnormalised scores against every concept) and the bank
// mask (D') those scores were computed with. The paper keeps a K-deep query
// cache whose nearest entry seeds a delta update, and per-class accumulators
// that persist across windows; storing one accumulator set per cached query, so
// that a delta update may start from any of the K entries, is this design's
// reading of the two. Entries are replaced round-robin (victim).
// Ports: one hypervector read port that returns chunk c of all K entries at
// once (the PSU compares against all of them in parallel), one hypervector
// write port, one accumulator read and one write port of W accumulators (one
// lane group). Reads have one cycle of latency.
module query_cache #(
  parameter int unsigned D    = torr_pkg::D_DEF,
  parameter int unsigned B    = torr_pkg::B_DEF,
  parameter int unsigned K    = torr_pkg::K_DEF,
  parameter int unsigned M    = torr_pkg::M_DEF,
  parameter int unsigned W    = torr_pkg::W_DEF,
  parameter int unsigned CW   = torr_pkg::CW_DEF,
  parameter int unsigned ACCW = $clog2(torr_pkg::D_DEF) + 2,
  localparam int unsigned G   = (M + W - 1) / W,
  localparam int unsigned NCH = D / CW,
  localparam int unsigned CHW = $clog2(NCH),
  localparam int unsigned KW  = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned GW  = (G > 1) ? $clog2(G) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   inv_all,
  // hypervector read, all entries in parallel
  input  logic                   rd_en,
  input  logic [CHW-1:0]         rd_chunk,
  output logic [CW-1:0]          rd_hv [K],
  // hypervector write
  input  logic                   wr_en,
  input  logic [KW-1:0]          wr_entry,
  input  logic [CHW-1:0]         wr_chunk,
  input  logic [CW-1:0]          wr_data,
  // entry metadata
  output logic [K-1:0]           valid,
  output logic [B-1:0]           mask [K],
  output logic [KW-1:0]          victim,
  input  logic                   commit,      // entry 'victim' now holds a new query
  input  logic [B-1:0]           commit_mask,
  // accumulator read / write, one lane group at a time
  input  logic                   acc_rd_en,
  input  logic [KW-1:0]          acc_rd_entry,
  input  logic [GW-1:0]          acc_rd_grp,
  output logic signed [ACCW-1:0] acc_rd_data [W],
  input  logic                   acc_wr_en,
  input  logic [KW-1:0]          acc_wr_entry,
  input  logic [GW-1:0]          acc_wr_grp,
  input  logic signed [ACCW-1:0] acc_wr_data [W]
);
  for (genvar k = 0; k < K; k++) begin : g_entry
    logic [CW-1:0] hv [NCH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_entry == KW'(k)) hv[wr_chunk] <= wr_data;
      if (rd_en) rd_hv[k] <= hv[rd_chunk];
    end
  end

  logic [W*ACCW-1:0] accm [K*G];
  logic [W*ACCW-1:0] acc_rd_word, acc_wr_word;

  always_comb
    for (int l = 0; l < int'(W); l++) begin
      acc_rd_data[l]                 = acc_rd_word[l*ACCW +: ACCW];
      acc_wr_word[l*ACCW +: ACCW]    = acc_wr_data[l];
    end

  always_ff @(posedge clk) begin
    if (acc_wr_en) accm[int'(acc_wr_entry) * G + int'(acc_wr_grp)] <= acc_wr_word;
    if (acc_rd_en) acc_rd_word <= accm[int'(acc_rd_entry) * G + int'(acc_rd_grp)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid  <= '0;
      victim <= '0;
      for (int k = 0; k < K; k++) mask[k] <= '0;
    end else if (inv_all) begin
      valid  <= '0;
      victim <= '0;
    end else if (commit) begin
      valid[victim] <= 1'b1;
      mask[victim]  <= commit_mask;
      victim        <= (victim == KW'(K - 1)) ? '0 : victim + 1'b1;
    end
  end
endmodule
