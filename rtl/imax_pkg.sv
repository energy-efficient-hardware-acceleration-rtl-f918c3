// imax_pkg: types and constants shared by the IMAX lane.
//
// The lane is a linear array of processing elements (PEs), each paired with a
// local memory module (LMM). Data words are 64 bits wide; the floating-point
// unit works on two FP32 values per word (2x32-bit SIMD). Four logical threads
// share one pipelined FPU. A burst is 16 FP16 elements, i.e. four 64-bit words,
// one word per thread. These numbers follow the paper; the token layout, the
// PE operation codes and the stream header format are this design's own.
package imax_pkg;

  localparam int unsigned DATA_W      = 64;
  localparam int unsigned NUM_PE      = 64;     // PEs (and LMMs) per lane
  localparam int unsigned LMM_BYTES   = 32768;  // 32 KB per LMM
  localparam int unsigned LMM_WORDS   = LMM_BYTES / (DATA_W / 8);
  localparam int unsigned LMM_AW      = $clog2(LMM_WORDS);  // 12
  localparam int unsigned THREADS     = 4;      // column-wise multithreading
  localparam int unsigned TID_W       = $clog2(THREADS);
  localparam int unsigned BURST_ELEMS = 16;     // FP16 elements per burst
  localparam int unsigned FP16_PER_WORD = DATA_W / 16;
  localparam int unsigned BURST_WORDS = BURST_ELEMS / FP16_PER_WORD;  // 4
  localparam int unsigned FMA_STAGES  = 3;      // fp32_fma pipeline depth
  localparam int unsigned ID_W        = 6;      // PE / LMM select field width
  localparam int unsigned LEN_W       = LMM_AW + 1;  // 13: up to LMM_WORDS words

  localparam logic [31:0] FP32_QNAN = 32'h7FC0_0000;

  // Operation of a PE on the execution path.
  typedef enum logic [3:0] {
    OP_NOP    = 4'd0,  // pass the token on unchanged
    OP_LDA    = 4'd1,  // a <= LMM[base + index]
    OP_LDB    = 4'd2,  // b <= LMM[base + index]
    OP_CVT_LO = 4'd3,  // c,d <= FP32 of the low two FP16 of a,b
    OP_CVT_HI = 4'd4,  // c,d <= FP32 of the high two FP16 of a,b
    OP_FMA    = 4'd5   // acc[thread] += c*d (2 lanes); store acc at the end
  } pe_op_e;

  // Configuration of one PE (written in the CONF phase).
  typedef struct packed {
    pe_op_e            op;
    logic [LMM_AW-1:0] base;     // LMM base address of LDA/LDB
    logic [LMM_AW-1:0] st_addr;  // where OP_FMA stores its THREADS accumulators
  } pe_cfg_t;

  // Token travelling down the execution path, one PE per cycle.
  typedef struct packed {
    logic              valid;
    logic              last;     // last token of the EXEC burst sequence
    logic [LMM_AW-1:0] idx;      // word index within the vectors
    logic [TID_W-1:0]  tid;      // logical thread = idx mod THREADS
    logic [DATA_W-1:0] a;        // raw word (four FP16)
    logic [DATA_W-1:0] b;        // raw word (four FP16)
    logic [DATA_W-1:0] c;        // two FP32
    logic [DATA_W-1:0] d;        // two FP32
  } token_t;

  // Stream header tags.
  typedef enum logic [3:0] {
    TAG_NONE  = 4'd0,
    TAG_CONF  = 4'd1,
    TAG_REGV  = 4'd2,
    TAG_LOAD  = 4'd3,
    TAG_EXEC  = 4'd4,
    TAG_DRAIN = 4'd5,
    TAG_END   = 4'd6
  } tag_e;

  // 64-bit header word read from the DMA stream.
  typedef struct packed {
    tag_e              tag;      // [63:60]
    logic [ID_W-1:0]   id;       // [59:54] PE / LMM number
    logic [LMM_AW-1:0] addr;     // [53:42] LMM address (CONF: base)
    logic [LEN_W-1:0]  len;      // [41:29] words (LOAD/DRAIN/EXEC)
    logic [LMM_AW-1:0] aux_addr; // [28:17] CONF: st_addr
    pe_op_e            aux_op;   // [16:13] CONF: op
    logic [DATA_W-8-ID_W-2*LMM_AW-LEN_W-1:0] rsvd;  // [12:0], fills the word to 64 bits
  } hdr_t;

  // Phases of a lane, as named in the execution-time breakdown.
  typedef enum logic [2:0] {
    PH_IDLE  = 3'd0,
    PH_CONF  = 3'd1,
    PH_REGV  = 3'd2,
    PH_RANGE = 3'd3,
    PH_LOAD  = 3'd4,
    PH_EXEC  = 3'd5,
    PH_DRAIN = 3'd6
  } phase_e;
  localparam int unsigned NUM_PHASES = 7;

endpackage
