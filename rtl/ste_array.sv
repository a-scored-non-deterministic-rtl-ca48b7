// ste_array: the array of N STE+s and their interconnect.
//
// Every STE+ drives its activity and score onto the global bus; the
// interconnect picks each STE+'s fan-in from that bus. All STE+s consume the
// same input symbol in the same clock cycle, so the array advances one symbol
// per step, whatever the number of simultaneously active states.
//
// Configuration words (cfg_valid with cfg_word) are decoded here:
//   OP_SYM   writes 32 symbol-class bits of the addressed STE+,
//   OP_SCORE writes its score and accepting flag,
//   OP_FAN   goes to the interconnect,
//   OP_CLEAR wipes the configuration of the whole array in one cycle.
// Words addressing an STE at or beyond N are ignored.
//
// Outputs: act (activity of all STE+s), accept_vec (active and accepting)
// and scores, all registered inside the STE+s and valid from the edge that
// consumed the symbol until the next step or run_clear.
//
// The array of STE+s and its size range (1K to 64K states in the published
// evaluation) follow the published design; the default N = 1024 is its
// smallest evaluated size. The command decoding is this design's own.
module ste_array
  import napoly_pkg::*;
#(
  parameter int unsigned N       = 1024,
  parameter int unsigned MAX_FAN = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cfg_valid,
  input  cfg_word_t       cfg_word,
  input  logic            run_clear,
  input  logic            step,
  input  sym_t            sym,
  output logic   [N-1:0]  act,
  output logic   [N-1:0]  accept_vec,
  output score_t [N-1:0]  scores
);
  logic [N-1:0]                  accepting;
  logic [N-1:0][MAX_FAN-1:0]     fan_act;
  score_t [N-1:0][MAX_FAN-1:0]   fan_score;

  logic cfg_clear, cfg_sym_we, cfg_score_we, cfg_addr_ok;
  assign cfg_addr_ok  = (32'(cfg_word.ste) < N);
  assign cfg_clear    = cfg_valid && (cfg_word.op == OP_CLEAR);
  assign cfg_sym_we   = cfg_valid && (cfg_word.op == OP_SYM) && cfg_addr_ok;
  assign cfg_score_we = cfg_valid && (cfg_word.op == OP_SCORE) && cfg_addr_ok;

  ste_interconnect #(.N(N), .MAX_FAN(MAX_FAN)) u_ic (
    .clk, .rst_n, .cfg_valid, .cfg_word,
    .bus_act(act), .bus_score(scores),
    .fan_act, .fan_score
  );

  for (genvar i = 0; i < N; i++) begin : g_ste
    ste_plus #(.MAX_FAN(MAX_FAN)) u_ste (
      .clk, .rst_n,
      .cfg_clear,
      .cfg_sel      (32'(cfg_word.ste) == i),
      .cfg_sym_we,
      .cfg_chunk    (cfg_word.sel[$clog2(NUM_CHUNK)-1:0]),
      .cfg_bits     (cfg_word.data),
      .cfg_score_we,
      .cfg_score    (score_t'(cfg_word.data[SCORE_W-1:0])),
      .cfg_accept   (cfg_word.flags[0]),
      .run_clear, .step, .sym,
      .fan_act      (fan_act[i]),
      .fan_score    (fan_score[i]),
      .active       (act[i]),
      .score        (scores[i]),
      .accepting    (accepting[i])
    );
  end

  assign accept_vec = act & accepting;
endmodule
