// napoly_pkg: shared widths, types and command encodings of the scored NFA
// processor (NAPOLY+).
//
// Symbols are bytes. Scores are 16-bit signed two's-complement numbers; all
// score arithmetic saturates at the 16-bit limits. STE identifiers are 16
// bits wide, so an array may hold up to 65536 STE+s (the largest array the
// published evaluation used). The 64-bit configuration word and the 64-bit
// report record defined here are this design's own formats; the published
// description says only that patterns arrive through a buffer and that
// (accepting STE id, input offset, score) triples leave through one.
package napoly_pkg;

  localparam int unsigned SYM_W     = 8;             // input symbol width (bytes)
  localparam int unsigned NUM_SYMS  = 1 << SYM_W;    // symbol alphabet size
  localparam int unsigned CHUNK_W   = 32;            // symbol-class bits per config write
  localparam int unsigned NUM_CHUNK = NUM_SYMS / CHUNK_W;
  localparam int unsigned SCORE_W   = 16;
  localparam int unsigned ID_W      = 16;
  localparam int unsigned OFFSET_W  = 32;

  typedef logic [SYM_W-1:0]          sym_t;
  typedef logic signed [SCORE_W-1:0] score_t;
  typedef logic [ID_W-1:0]           ste_id_t;
  typedef logic [OFFSET_W-1:0]       offset_t;

  localparam score_t SCORE_MAX = score_t'({1'b0, {(SCORE_W-1){1'b1}}});
  localparam score_t SCORE_MIN = score_t'({1'b1, {(SCORE_W-1){1'b0}}});

  // Configuration commands, read from the pattern buffer.
  typedef enum logic [3:0] {
    OP_NOP   = 4'h0,  // ignored
    OP_SYM   = 4'h1,  // sel = chunk, data = symbol-class bits [32*sel +: 32]
    OP_SCORE = 4'h2,  // data[15:0] = STE score, flags[0] = accepting
    OP_FAN   = 4'h3,  // sel = fan-in slot, flags[0] = enable, data = source STE id
    OP_CLEAR = 4'h4,  // wipe the whole array configuration
    OP_END   = 4'hF   // end of configuration: start streaming the input
  } cfg_op_e;

  typedef struct packed {
    cfg_op_e     op;     // [63:60]
    ste_id_t     ste;    // [59:44] addressed STE+
    logic [3:0]  sel;    // [43:40] chunk index or fan-in slot
    logic [7:0]  flags;  // [39:32]
    logic [31:0] data;   // [31:0]
  } cfg_word_t;

  // One entry of the input buffer.
  typedef struct packed {
    logic last;  // final symbol of the stream
    sym_t sym;
  } in_entry_t;

  // One report record, written to the output buffer.
  typedef struct packed {
    ste_id_t ste;     // accepting STE+ that became active
    offset_t offset;  // offset of the input symbol that activated it
    score_t  score;   // accumulated best path score
  } report_t;

  // Controller modes.
  typedef enum logic [1:0] {
    MODE_IDLE   = 2'd0,
    MODE_CONFIG = 2'd1,
    MODE_RUN    = 2'd2,
    MODE_DRAIN  = 2'd3
  } mode_e;

  // Saturating signed addition.
  function automatic score_t sat_add(score_t a, score_t b);
    logic signed [SCORE_W:0] s;
    s = {a[SCORE_W-1], a} + {b[SCORE_W-1], b};
    if (s > $signed({1'b0, SCORE_MAX})) return SCORE_MAX;
    if (s < $signed({1'b1, SCORE_MIN})) return SCORE_MIN;
    return s[SCORE_W-1:0];
  endfunction

endpackage
