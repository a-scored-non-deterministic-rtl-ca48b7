// ste_plus: scored State Transition Element (STE+).
//
// An STE+ is one state of a homogeneous (ANML-style) NFA: the transition
// symbol belongs to the state, not to the edge. It holds
//   * a symbol class, one bit per byte value, in an 8 x 32 memory read
//     asynchronously by the input symbol (word = symbol[7:5]),
//   * a signed score that is added when the STE+ matches,
//   * an accepting flag.
// On every step (one input symbol) the STE+ is enabled when at least one of
// its fan-in wires is active. Each non-accepting STE+ also has a dedicated
// start fan-in that is always active and carries score 0: this is the
// always-active start state, and it lets a new path begin at every symbol.
// Accepting STE+s have no start fan-in. If enabled and the symbol is in the
// class, the STE+ becomes active with score = (best incoming score) + own
// score, where the best incoming score is the maximum over the active
// fan-ins (and 0 from the start fan-in). Otherwise it becomes inactive with
// score 0. The addition saturates at the 16-bit limits.
//
// Following the published design: the start fan-in, score accumulation along
// a path, accepting STE+s without a start connection, symbols in a memory
// and the score in a register. This design's choices: taking the maximum of
// the incoming scores, the 16-bit width and saturation, and the 32-bit
// configuration write port of the symbol class.
//
// Timing: active and score are registers, updated at the clock edge where
// step is high, so they reflect the symbol consumed at the previous step.
// run_clear deactivates the STE+ (start of a new input stream). Configuration
// writes (cfg_sel with cfg_sym_we / cfg_score_we) and cfg_clear take effect
// at the next edge. Reset (active low, synchronous) clears everything.
module ste_plus
  import napoly_pkg::*;
#(
  parameter int unsigned MAX_FAN = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration
  input  logic                cfg_clear,
  input  logic                cfg_sel,
  input  logic                cfg_sym_we,
  input  logic [$clog2(NUM_CHUNK)-1:0] cfg_chunk,
  input  logic [CHUNK_W-1:0]  cfg_bits,
  input  logic                cfg_score_we,
  input  score_t              cfg_score,
  input  logic                cfg_accept,
  // operation
  input  logic                run_clear,
  input  logic                step,
  input  sym_t                sym,
  input  logic [MAX_FAN-1:0]  fan_act,
  input  score_t [MAX_FAN-1:0] fan_score,
  output logic                active,
  output score_t              score,
  output logic                accepting
);
  // Transition symbols: a NUM_CHUNK x 32 memory without reset (distributed
  // memory on an FPGA), plus one valid flag per word so that reset and
  // OP_CLEAR empty the class in one cycle without touching the memory.
  localparam int unsigned CW = $clog2(NUM_CHUNK);
  logic [CHUNK_W-1:0]   sym_mem [NUM_CHUNK];
  logic [NUM_CHUNK-1:0] chunk_valid;
  score_t               own_score;   // transition score register

  // Best incoming score and enable.
  logic   enable;
  score_t best_in;
  always_comb begin
    enable  = !accepting;           // start fan-in: always active, score 0
    best_in = '0;
    for (int k = 0; k < MAX_FAN; k++) begin
      if (fan_act[k]) begin
        if (!enable || (fan_score[k] > best_in)) best_in = fan_score[k];
        enable = 1'b1;
      end
    end
  end

  logic          match;
  logic [CW-1:0] rd_word;
  assign rd_word = sym[SYM_W-1 -: CW];
  assign match   = chunk_valid[rd_word] && sym_mem[rd_word][sym[SYM_W-CW-1:0]];

  always_ff @(posedge clk) begin
    if (cfg_sel && cfg_sym_we) sym_mem[cfg_chunk] <= cfg_bits;
  end

  // Configuration state.
  always_ff @(posedge clk) begin
    if (!rst_n || cfg_clear) begin
      chunk_valid <= '0;
      own_score   <= '0;
      accepting   <= 1'b0;
    end else if (cfg_sel) begin
      if (cfg_sym_we) chunk_valid[cfg_chunk] <= 1'b1;
      if (cfg_score_we) begin
        own_score <= cfg_score;
        accepting <= cfg_accept;
      end
    end
  end

  // Path state.
  always_ff @(posedge clk) begin
    if (!rst_n || run_clear || cfg_clear) begin
      active <= 1'b0;
      score  <= '0;
    end else if (step) begin
      active <= enable && match;
      score  <= (enable && match) ? sat_add(best_in, own_score) : '0;
    end
  end
endmodule
