// psu: partial-similarity unit. It holds the current query hypervector and
// measures its drift from the cached queries.
//  * Load: the host streams the query in CW-bit chunks (chunk 0 first). Each
//    chunk is written into the query buffer and, one cycle later, XORed against
//    the same chunk of all K cached queries; an adder tree counts the flipped
//    bits and adds them to K running Hamming distances. Chunks of disabled
//    banks are not counted, so the distance is measured over D' dimensions.
//    A bind load XORs the chunk into the buffer instead (Hadamard binding of
//    bipolar vectors, used to form the prompt vector g_P); it voids the distances.
//  * find: picks the nearest valid cached query whose bank mask equals the
//    current one (its accumulators are then reusable) and reports |Delta|.
//  * Extract: walks the enabled chunks of query XOR nearest and pushes the
//    index of every flipped bit into the Delta-index FIFO, one per cycle,
//    stalling while the FIFO is full.
// XOR, popcount, rho = 1 - 2|Delta|/D' (formed in qos_controller) and FIFO
// filling follow the paper; the chunk width, the parallel K-way compare during
// load and the same-mask rule for the nearest entry are this design's choices.
module psu #(
  parameter int unsigned D  = torr_pkg::D_DEF,
  parameter int unsigned B  = torr_pkg::B_DEF,
  parameter int unsigned K  = torr_pkg::K_DEF,
  parameter int unsigned CW = torr_pkg::CW_DEF,
  localparam int unsigned NCH = D / CW,
  localparam int unsigned CHW = $clog2(NCH),
  localparam int unsigned CPB = (D / B) / CW,   // chunks per bank
  localparam int unsigned KW  = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned IW  = $clog2(D),
  localparam int unsigned DSW = $clog2(D) + 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [B-1:0]    bank_en,
  // query load
  input  logic            q_valid,
  input  logic            q_bind,
  input  logic [CHW-1:0]  q_chunk,
  input  logic [CW-1:0]   q_data,
  // query-cache read port and metadata
  output logic            cq_rd_en,
  output logic [CHW-1:0]  cq_rd_chunk,
  input  logic [CW-1:0]   cq_rd_hv [K],
  input  logic [K-1:0]    cq_valid,
  input  logic [B-1:0]    cq_mask [K],
  // nearest cached query
  input  logic            find,
  output logic            found,
  output logic [KW-1:0]   nearest,
  output logic [15:0]     ndelta,
  // Delta extraction into the FIFO
  input  logic            ext_start,
  output logic            ext_busy,
  output logic            fifo_push,
  output logic [IW-1:0]   fifo_din,
  input  logic            fifo_full,
  // query-buffer read port (aligner, cache commit)
  input  logic            qb_rd_en,
  input  logic [CHW-1:0]  qb_rd_chunk,
  output logic [CW-1:0]   qb_rd_data
);
  logic [CW-1:0]  qbuf [NCH];
  logic [DSW-1:0] hdist [K];
  logic           dist_ok;

  function automatic logic [$clog2(CW):0] popcount(input logic [CW-1:0] v);
    logic [$clog2(CW):0] s = '0;
    for (int i = 0; i < int'(CW); i++) s += ($clog2(CW)+1)'(v[i]);
    return s;
  endfunction

  function automatic logic chunk_on(input logic [CHW-1:0] c, input logic [B-1:0] en);
    return en[int'(c) / int'(CPB)];
  endfunction

  // ---------------- load and running distances ----------------
  logic           cmp_v, cmp_first, cmp_on;
  logic [CW-1:0]  cmp_q;

  always_ff @(posedge clk) begin
    if (q_valid) qbuf[q_chunk] <= q_bind ? (qbuf[q_chunk] ^ q_data) : q_data;
    if (qb_rd_en) qb_rd_data <= qbuf[qb_rd_chunk];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmp_v     <= 1'b0;
      cmp_first <= 1'b0;
      cmp_on    <= 1'b0;
      cmp_q     <= '0;
      dist_ok   <= 1'b0;
      for (int k = 0; k < K; k++) hdist[k] <= '0;
    end else begin
      cmp_v     <= q_valid && !q_bind;
      cmp_first <= (q_chunk == '0);
      cmp_on    <= chunk_on(q_chunk, bank_en);
      cmp_q     <= q_data;
      if (q_valid && q_bind)                 dist_ok <= 1'b0;
      else if (q_valid && q_chunk == '0)     dist_ok <= 1'b1;
      if (cmp_v)
        for (int k = 0; k < K; k++)
          hdist[k] <= (cmp_first ? '0 : hdist[k])
                   + (cmp_on ? DSW'(popcount(cmp_q ^ cq_rd_hv[k])) : '0);
    end
  end

  // ---------------- nearest entry ----------------
  logic          best_f;
  logic [KW-1:0] best_k;
  always_comb begin
    best_f = 1'b0;
    best_k = '0;
    for (int k = 0; k < K; k++)
      if (cq_valid[k] && cq_mask[k] == bank_en && (!best_f || hdist[k] < hdist[best_k])) begin
        best_f = 1'b1;
        best_k = KW'(k);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      found   <= 1'b0;
      nearest <= '0;
      ndelta  <= '0;
    end else if (find) begin
      found   <= best_f && dist_ok;
      nearest <= best_k;
      ndelta  <= 16'(hdist[best_k]);
    end
  end

  // ---------------- Delta extraction ----------------
  typedef enum logic [1:0] {EX_IDLE, EX_RD, EX_WAIT, EX_SCAN} ex_e;
  ex_e            ex_st;
  logic [CHW-1:0] ex_c;
  logic [CW-1:0]  diff;
  logic [CW-1:0]  ex_q;

  logic [$clog2(CW)-1:0] low_bit;
  always_comb begin
    low_bit = '0;
    for (int i = CW - 1; i >= 0; i--) if (diff[i]) low_bit = ($clog2(CW))'(i);
  end

  always_ff @(posedge clk) if (ex_st == EX_RD) ex_q <= qbuf[ex_c];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ex_st <= EX_IDLE;
      ex_c  <= '0;
      diff  <= '0;
    end else begin
      case (ex_st)
        EX_IDLE: if (ext_start) begin ex_c <= '0; ex_st <= EX_RD; end
        EX_RD:   ex_st <= chunk_on(ex_c, bank_en) ? EX_WAIT
                        : (ex_c == CHW'(NCH - 1)) ? EX_IDLE : EX_RD;
        EX_WAIT: begin
          diff  <= ex_q ^ cq_rd_hv[nearest];
          ex_st <= EX_SCAN;
        end
        EX_SCAN: if (diff == '0) ex_st <= (ex_c == CHW'(NCH - 1)) ? EX_IDLE : EX_RD;
                 else if (!fifo_full) diff[low_bit] <= 1'b0;
        default: ex_st <= EX_IDLE;
      endcase
      if ((ex_st == EX_RD && !chunk_on(ex_c, bank_en)) ||
          (ex_st == EX_SCAN && diff == '0))
        ex_c <= ex_c + 1'b1;
    end
  end

  assign ext_busy    = (ex_st != EX_IDLE);
  assign fifo_push   = (ex_st == EX_SCAN) && (diff != '0) && !fifo_full;
  assign fifo_din    = IW'(ex_c) * IW'(CW) + IW'(low_bit);
  assign cq_rd_en    = q_valid || (ex_st == EX_RD);
  assign cq_rd_chunk = (ex_st == EX_RD) ? ex_c : q_chunk;
endmodule
