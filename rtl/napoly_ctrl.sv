// napoly_ctrl: mode controller of the processor.
//
// Four modes:
//   IDLE   - waits for a word in the pattern buffer.
//   CONFIG - reconfiguration stage: pops one configuration word per cycle
//            and presents it to the array (cfg_valid/cfg_word) until an
//            OP_END word, which is consumed and starts a run: run_clear
//            deactivates every STE+ and the symbol offset restarts at 0.
//   RUN    - pops one symbol per cycle from the input buffer when the report
//            unit allows it (can_step), and steps the array with it. The
//            offset output is the position, in the stream, of the symbol the
//            array state currently reflects. A symbol flagged 'last' ends
//            the stream.
//   DRAIN  - waits until the reports of the last symbol are written, then
//            pulses done and returns to IDLE.
// Another run with the same patterns needs only an OP_END word; a new
// pattern set usually starts with OP_CLEAR. The published design names a
// reconfiguration stage and input/pattern buffers; this sequencing and the
// command format (napoly_pkg) are this design's own.
//
// Timing: pops, cfg_valid and step are combinational from the buffer flags
// and the mode register, so each takes effect at the next clock edge.
module napoly_ctrl
  import napoly_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // pattern buffer (read side)
  input  logic       pat_empty,
  input  cfg_word_t  pat_word,
  output logic       pat_pop,
  // input buffer (read side)
  input  logic       in_empty,
  input  in_entry_t  in_entry,
  output logic       in_pop,
  // array
  output logic       cfg_valid,
  output cfg_word_t  cfg_word,
  output logic       run_clear,
  output logic       step,
  output sym_t       sym,
  output offset_t    offset,
  // report unit
  input  logic       can_step,
  input  logic       rep_idle,
  // status
  output mode_e      mode,
  output logic       done
);
  offset_t next_offset;

  always_comb begin
    pat_pop   = 1'b0;
    in_pop    = 1'b0;
    cfg_valid = 1'b0;
    run_clear = 1'b0;
    step      = 1'b0;
    done      = 1'b0;
    cfg_word  = pat_word;
    sym       = in_entry.sym;
    unique case (mode)
      MODE_CONFIG: if (!pat_empty) begin
        pat_pop   = 1'b1;
        cfg_valid = (pat_word.op != OP_END);
        run_clear = (pat_word.op == OP_END);
      end
      MODE_RUN: if (!in_empty && can_step) begin
        in_pop = 1'b1;
        step   = 1'b1;
      end
      MODE_DRAIN: done = rep_idle;
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mode        <= MODE_IDLE;
      offset      <= '0;
      next_offset <= '0;
    end else begin
      unique case (mode)
        MODE_IDLE:   if (!pat_empty) mode <= MODE_CONFIG;
        MODE_CONFIG: if (run_clear) begin
          mode        <= MODE_RUN;
          offset      <= '0;
          next_offset <= '0;
        end
        MODE_RUN: if (step) begin
          offset      <= next_offset;
          next_offset <= next_offset + 1'b1;
          if (in_entry.last) mode <= MODE_DRAIN;
        end
        MODE_DRAIN: if (done) mode <= MODE_IDLE;
        default: mode <= MODE_IDLE;
      endcase
    end
  end
endmodule
