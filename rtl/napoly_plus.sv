// napoly_plus: top level of the scored NFA processor (NAPOLY+).
//
// The processor finds, for every position of an input byte stream, the best
// score with which each accepting state of a programmed automaton can be
// reached, where every state adds a signed score (for instance +2 for a
// matching base, -1 for a mismatch, -2 for a gap). Data flow:
//
//   pattern buffer --> controller --> STE+ array --> report unit --> output buffer
//   input buffer   ------^
//
// The three buffers face external memory (DRAM in the published system);
// their far sides are this module's ports. The controller applies the
// configuration words to the array, then streams the input through it at
// one symbol per clock; the report unit writes one record per active
// accepting STE+ and stalls the stream while records are pending.
//
// Ports: pat_* write 64-bit configuration words (napoly_pkg::cfg_word_t),
// in_* write input symbols with a 'last' flag (in_entry_t), out_* read
// 64-bit report records (report_t, first-word fall-through: out_data is
// valid while out_empty is low, out_rd pops it). mode shows the controller
// mode; done pulses for one cycle when a run has been fully reported.
// Reset is synchronous and active low.
//
// The blocks and their order follow the published design (buffers facing
// DRAM, an STE+ array, reports of accepting state, offset and score); the
// controller, the report serialisation with its stall and all formats are
// this design's own.
module napoly_plus
  import napoly_pkg::*;
#(
  parameter int unsigned N         = 1024,
  parameter int unsigned MAX_FAN   = 4,
  parameter int unsigned PAT_DEPTH = 64,
  parameter int unsigned IN_DEPTH  = 64,
  parameter int unsigned OUT_DEPTH = 64
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       pat_wr,
  input  cfg_word_t  pat_data,
  output logic       pat_full,
  input  logic       in_wr,
  input  in_entry_t  in_data,
  output logic       in_full,
  input  logic       out_rd,
  output report_t    out_data,
  output logic       out_empty,
  output mode_e      mode,
  output logic       done
);
  // pattern buffer
  logic      pat_empty, pat_pop;
  cfg_word_t pat_word;
  sync_fifo #(.WIDTH($bits(cfg_word_t)), .DEPTH(PAT_DEPTH)) u_pat_buf (
    .clk, .rst_n, .wr_en(pat_wr), .wr_data(pat_data), .full(pat_full),
    .rd_en(pat_pop), .rd_data(pat_word), .empty(pat_empty)
  );

  // input buffer
  logic      in_empty, in_pop;
  in_entry_t in_entry;
  sync_fifo #(.WIDTH($bits(in_entry_t)), .DEPTH(IN_DEPTH)) u_in_buf (
    .clk, .rst_n, .wr_en(in_wr), .wr_data(in_data), .full(in_full),
    .rd_en(in_pop), .rd_data(in_entry), .empty(in_empty)
  );

  // controller
  logic      cfg_valid, run_clear, step, can_step, rep_idle;
  cfg_word_t cfg_word;
  sym_t      sym;
  offset_t   offset;
  napoly_ctrl u_ctrl (
    .clk, .rst_n,
    .pat_empty, .pat_word, .pat_pop,
    .in_empty, .in_entry, .in_pop,
    .cfg_valid, .cfg_word, .run_clear, .step, .sym, .offset,
    .can_step, .rep_idle,
    .mode, .done
  );

  // STE+ array
  logic   [N-1:0] act, accept_vec;
  score_t [N-1:0] scores;
  ste_array #(.N(N), .MAX_FAN(MAX_FAN)) u_array (
    .clk, .rst_n, .cfg_valid, .cfg_word, .run_clear, .step, .sym,
    .act, .accept_vec, .scores
  );

  // report unit and output buffer
  logic    rep_valid, out_full;
  report_t rep_rec;
  report_unit #(.N(N)) u_report (
    .clk, .rst_n, .accept_vec, .scores, .offset, .step, .run_clear,
    .out_valid(rep_valid), .out_rec(rep_rec), .out_ready(!out_full),
    .can_step, .idle(rep_idle)
  );

  sync_fifo #(.WIDTH($bits(report_t)), .DEPTH(OUT_DEPTH)) u_out_buf (
    .clk, .rst_n, .wr_en(rep_valid), .wr_data(rep_rec), .full(out_full),
    .rd_en(out_rd), .rd_data(out_data), .empty(out_empty)
  );
endmodule
