// report_unit: turns accepting STE+ activity into report records.
//
// After each input symbol the array may hold any number of active accepting
// STE+s. Each must be reported as a record (STE id, offset of the symbol
// that activated it, its score) into the output buffer. This unit emits one
// record per clock cycle, lowest STE id first, taken straight from the
// array's registered accept vector and scores. A done mask remembers which
// STE+s of the current symbol were already reported.
//
// Stall: can_step tells the controller whether the array may consume the
// next symbol at this clock edge. It is high only when every pending record
// of the current symbol has been written, or is being written in this cycle.
// So the array runs at one symbol per cycle while no more than one accepting
// STE+ fires per symbol and the output buffer has room; otherwise the input
// waits. (The published throughput figures exclude flushing the results;
// how reports are serialised is this design's choice.)
//
// Interface: out_valid/out_rec push into the output buffer when out_ready
// (buffer not full). step and run_clear, the same strobes that advance or
// clear the array, reset the done mask. idle is high when nothing is pending.
module report_unit
  import napoly_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic   [N-1:0]  accept_vec,
  input  score_t [N-1:0]  scores,
  input  offset_t         offset,
  input  logic            step,
  input  logic            run_clear,
  output logic            out_valid,
  output report_t         out_rec,
  input  logic            out_ready,
  output logic            can_step,
  output logic            idle
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [N-1:0]  done_mask, pend, remaining;
  logic [IW-1:0] first;
  logic          any;

  assign pend = accept_vec & ~done_mask;
  assign any  = |pend;

  // Priority encoder: lowest pending STE id.
  always_comb begin
    first = '0;
    for (int i = N - 1; i >= 0; i--)
      if (pend[i]) first = IW'(i);
  end

  assign out_valid = any && out_ready;
  assign out_rec   = '{ste: ste_id_t'(first), offset: offset, score: scores[first]};

  always_comb begin
    remaining = pend;
    if (out_valid) remaining[first] = 1'b0;
  end
  assign can_step = (remaining == '0);
  assign idle     = !any;

  always_ff @(posedge clk) begin
    if (!rst_n || run_clear || step) done_mask <= '0;
    else if (out_valid)              done_mask[first] <= 1'b1;
  end

  a_step_only_when_drained: assert property (@(posedge clk) disable iff (!rst_n)
    step |-> can_step) else $error("report_unit: array stepped with reports pending");
endmodule
