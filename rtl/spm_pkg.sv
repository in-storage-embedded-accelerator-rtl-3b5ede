// spm_pkg: types and constants shared by the sparse pattern matching kernel.
//
// Data format (one 32-bit item, MSB first):
//   bit 31      flag: 1 = pattern identifier, 0 = key/value pair
//   flag = 1:   bits 30:0  pattern (document) identifier, 31 bits
//   flag = 0:   bits 30:8  key (index into the bag of words), 23 bits
//               bits  7:0  value (word frequency), 8 bits
// The field widths (1/31 and 1/23/8) are those of the published data format;
// which flag value marks a pattern identifier is this design's choice.
//
// Command word on commandIn (128 bits): opcode in bits 127:120, argument A in
// bits 63:32, argument B in bits 31:0. Result word on resultsToMemory
// (128 bits): record type in bits 127:120, then the fields of result_rec_t.
// Both encodings are this design's own; only the port widths are published.
//
// Cosine threshold: cos = dot / (|A| |B|) >= t is tested without a divider
// or square root as dot^2 * 2^COS_FRAC >= C * |B|^2, where the host supplies
// C = t^2 * |A|^2 * 2^COS_FRAC for its query A (unsigned, 64 bits).
package spm_pkg;

  localparam int unsigned WORD_W   = 32;   // one data item
  localparam int unsigned PID_W    = 31;   // pattern identifier
  localparam int unsigned KEY_W    = 23;   // word index
  localparam int unsigned VAL_W    = 8;    // word frequency
  localparam int unsigned SCORE_W  = 32;   // accumulated dot product
  localparam int unsigned CNT_W    = 16;   // partial products per document
  localparam int unsigned NORM_W   = 32;   // sum of squared document values
  localparam int unsigned COS_FRAC = 16;   // fraction bits of the cosine constant

  localparam int unsigned DATA_IN_W = 512; // dataIn port
  localparam int unsigned CMD_W     = 128; // commandIn port
  localparam int unsigned RESULT_W  = 128; // resultsToMemory port

  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [PID_W-1:0]   pid_t;
  typedef logic [KEY_W-1:0]   key_t;
  typedef logic [VAL_W-1:0]   val_t;
  typedef logic [SCORE_W-1:0] score_t;
  typedef logic [CNT_W-1:0]   cnt_t;
  typedef logic [NORM_W-1:0]  norm_t;

  // A key/value item as held in the query memory.
  typedef struct packed {
    logic flag;
    key_t key;
    val_t val;
  } kv_t;

  // Comparator -> accumulator event ("Pattern ID, Value pair").
  typedef struct packed {
    pid_t pid;       // document the event belongs to
    logic is_item;   // a document key/value item was consumed: dval valid
    logic is_match;  // its key is in the query: qval/dval form a partial product
    val_t qval;      // query value A_i
    val_t dval;      // document value B_i
    logic doc_end;   // last event of document pid
    logic run_end;   // last event of the whole dataset
  } match_ev_t;

  // Accumulator -> threshold filter ("Pattern ID, Distance").
  typedef struct packed {
    pid_t   pid;
    score_t score;   // sum of A_i * B_i over matching keys
    norm_t  norm2;   // sum of B_i^2 over the document's items
    cnt_t   npp;     // number of nonzero partial products
    logic   run_end; // this is the dataset's last document
  } doc_score_t;

  // Records sent to the host on resultsToMemory.
  typedef enum logic [7:0] {
    REC_DOC  = 8'h01,  // a document that passed the threshold
    REC_DONE = 8'h02   // end of a run, with totals
  } rec_type_e;

  typedef struct packed {
    rec_type_e    rtype;   // 127:120
    logic [23:0]  npp;     // 119:96 REC_DOC: partial products; REC_DONE: 0
    logic [31:0]  a;       // 95:64  REC_DOC: {1'b0, pid}; REC_DONE: documents seen
    logic [31:0]  b;       // 63:32  REC_DOC: score (dot product); REC_DONE: documents passed
    logic [31:0]  c;       // 31:0   REC_DOC: |B|^2;       REC_DONE: partial products
  } result_rec_t;

  typedef enum logic [7:0] {
    CMD_NOP        = 8'h00,
    CMD_QUERY_WR   = 8'h01,  // A = address, B = key/value item
    CMD_SET_QLEN   = 8'h02,  // B = number of query items
    CMD_SET_THRESH = 8'h03,  // B = dot-product threshold; selects dot-product mode
    CMD_START      = 8'h04,  // B = number of 32-bit data items to process
    CMD_SET_COS    = 8'h05   // {A, B} = cosine constant C; selects cosine mode
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e      op;    // 127:120
    logic [55:0]  rsvd;  // 119:64
    logic [31:0]  a;     // 63:32
    logic [31:0]  b;     // 31:0
  } cmd_t;

  function automatic logic is_pid(word_t w);
    return w[WORD_W-1];
  endfunction

  function automatic pid_t word_pid(word_t w);
    return w[PID_W-1:0];
  endfunction

  function automatic key_t word_key(word_t w);
    return w[VAL_W +: KEY_W];
  endfunction

  function automatic val_t word_val(word_t w);
    return w[VAL_W-1:0];
  endfunction

endpackage
