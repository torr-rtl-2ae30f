// torr_pkg: sizes, types and encodings shared by the similarity-gated HDC
// accelerator. The paper fixes none of the sizes below; they are this design's
// defaults (hypervector dimension D, B item-memory banks, M concept classes,
// W aligner lanes, K cached queries). Every module takes them as parameters
// whose defaults come from here.
package torr_pkg;

  // ---- default sizes (all chosen by this design) ----
  localparam int unsigned D_DEF      = 8192; // hypervector dimension
  localparam int unsigned B_DEF      = 16;   // item-memory banks (D' granularity)
  localparam int unsigned M_DEF      = 128;  // concept hypervectors (classes)
  localparam int unsigned W_DEF      = 64;   // class lanes of the aligner
  localparam int unsigned K_DEF      = 8;    // query-cache depth
  localparam int unsigned CW_DEF     = 64;   // query chunk / host data width
  localparam int unsigned NOBJ_DEF   = 64;   // output-cache entries (objects)
  localparam int unsigned TOPK_DEF   = 4;    // top-k key length
  localparam int unsigned FIFO_DEF   = 256;  // delta-index FIFO depth
  localparam int unsigned MDROP_DEF  = 3;    // margin LSBs ignored by the reasoning gate

  // fixed-point format of similarities and thresholds: signed, 8 fraction bits
  localparam int unsigned RHO_FRAC = 8;
  localparam int unsigned RHOW     = 10;     // covers [-1.0, +1.0]

  // ---- execution path chosen per query (Algorithm 1) ----
  typedef enum logic [1:0] {
    PATH_FULL   = 2'd0,
    PATH_DELTA  = 2'd1,
    PATH_BYPASS = 2'd2
  } path_e;

  // ---- host command opcodes ----
  typedef enum logic [2:0] {
    OP_CFG    = 3'd0,  // write a configuration register (addr = register)
    OP_IMEM   = 3'd1,  // write one W-bit group of an item-memory column
    OP_WMEM   = 3'd2,  // write one int8 task weight (addr = class)
    OP_WINDOW = 3'd3,  // open a window: data = {q depth, object count N}
    OP_QUERY  = 3'd4,  // load query chunk (addr = chunk); data[CW] are the bits
    OP_QBIND  = 3'd5,  // bind (XOR, i.e. Hadamard product) a chunk into the query
    OP_RUN    = 3'd6   // run the loaded query: addr = object slot, data[0] = weight job
  } op_e;

  // configuration register addresses (OP_CFG)
  localparam logic [3:0] CFG_TAU_BYP  = 4'd0;  // signed Q.8 bypass threshold
  localparam logic [3:0] CFG_TAU_G    = 4'd1;  // signed Q.8 delta-gate threshold
  localparam logic [3:0] CFG_N_HI     = 4'd2;  // object-count load threshold
  localparam logic [3:0] CFG_Q_HI     = 4'd3;  // queue-depth load threshold
  localparam logic [3:0] CFG_BUDGET   = 4'd4;  // aligner cycle budget per window
  localparam logic [3:0] CFG_DBUDGET  = 4'd5;  // largest |Delta| served by delta mode
  localparam logic [3:0] CFG_MODE     = 4'd6;  // bit0 int4, bit1 reasoner enable, bit2 score dump,
                                               // bit3 PSU off (no reuse: always full)
  localparam logic [3:0] CFG_DMA_BASE = 4'd7;  // result buffer base address

  typedef struct packed {
    logic [15:0] tau_byp;   // signed Q.8 in the low RHOW bits
    logic [15:0] tau_g;     // signed Q.8 in the low RHOW bits
    logic [15:0] n_hi;
    logic [15:0] q_hi;
    logic [31:0] budget;
    logic [15:0] dbudget;
    logic        prec_int4;
    logic        reason_en;
    logic        score_dump; // also return the score vector after each record
    logic        psu_off;    // ignore cached queries: every query takes the full path
    logic [31:0] dma_base;
  } cfg_t;

  // one result record, written to host memory by the DMA (64 bits)
  typedef struct packed {
    logic [7:0]  obj;       // object slot
    logic [1:0]  path;      // path_e
    logic        reused;    // output taken from the output cache
    logic        int4;      // scores were int4
    logic [4:0]  nbanks_l2; // log2 of active banks
    logic [15:0] ndelta;    // |Delta| against the nearest cached query
    logic [9:0]  rho;       // signed Q.8 similarity
    logic [7:0]  cls;       // winning class
    logic [7:0]  score;     // its final signed score (Q.7)
    logic [4:0]  rsvd;
  } result_t;

endpackage
