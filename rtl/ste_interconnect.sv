// ste_interconnect: fan-in wiring between STE+s.
//
// The published design builds its edges from global (horizontal) wires that
// carry the output of every STE+ across the array and local (vertical) wires
// that connect to and from each STE+, with a limited number of local wires
// per STE+. Here the global wires are the bus_act / bus_score vectors, and
// every STE+ owns MAX_FAN local wires. Each local wire is a configurable
// selector: a register holding a source STE index and an enable bit picks
// one STE+ off the global bus. An edge u -> v of the automaton is therefore
// programmed as "local wire k of v selects u"; an STE+ may feed any number of
// others, and may receive at most MAX_FAN edges (plus its start fan-in, which
// lives inside ste_plus). Realising the local wires as fan-in selectors,
// rather than fan-out lists, is this design's choice.
//
// Configuration: an OP_FAN word (cfg_valid high) sets slot cfg_word.sel of
// STE cfg_word.ste to source cfg_word.data with enable cfg_word.flags[0];
// OP_CLEAR disables all wires. Reset (active low, synchronous) does the same.
// The data path is purely combinational: fan_* follow bus_* in the same cycle.
module ste_interconnect
  import napoly_pkg::*;
#(
  parameter int unsigned N       = 1024,
  parameter int unsigned MAX_FAN = 4
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            cfg_valid,
  input  cfg_word_t                       cfg_word,
  input  logic   [N-1:0]                  bus_act,
  input  score_t [N-1:0]                  bus_score,
  output logic   [N-1:0][MAX_FAN-1:0]     fan_act,
  output score_t [N-1:0][MAX_FAN-1:0]     fan_score
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned SW = (MAX_FAN > 1) ? $clog2(MAX_FAN) : 1;

  logic [IW-1:0] src [N][MAX_FAN];
  logic          en  [N][MAX_FAN];

  logic cfg_fan, cfg_clr;
  assign cfg_fan = cfg_valid && (cfg_word.op == OP_FAN) &&
                   (32'(cfg_word.ste) < N) && (32'(cfg_word.sel) < MAX_FAN);
  assign cfg_clr = cfg_valid && (cfg_word.op == OP_CLEAR);

  always_ff @(posedge clk) begin
    if (!rst_n || cfg_clr) begin
      for (int d = 0; d < N; d++)
        for (int k = 0; k < MAX_FAN; k++) begin
          src[d][k] <= '0;
          en[d][k]  <= 1'b0;
        end
    end else if (cfg_fan) begin
      src[cfg_word.ste[IW-1:0]][cfg_word.sel[SW-1:0]] <= cfg_word.data[IW-1:0];
      en[cfg_word.ste[IW-1:0]][cfg_word.sel[SW-1:0]]  <= cfg_word.flags[0] &&
                                                          (cfg_word.data < N);
    end
  end

  always_comb begin
    for (int d = 0; d < N; d++)
      for (int k = 0; k < MAX_FAN; k++) begin
        fan_act[d][k]   = en[d][k] && bus_act[src[d][k]];
        fan_score[d][k] = bus_score[src[d][k]];
      end
  end
endmodule
