// sync_fifo: synchronous first-in first-out buffer.
//
// Used three times in the processor: as the pattern buffer (configuration
// words), the input buffer (symbols) and the output buffer (report records).
// The published design states only that these buffers exist and face DRAM;
// their organisation and depth are this design's choice.
//
// Storage is an array of DEPTH words with read and write pointers one bit
// wider than the address, so full and empty are told apart by the top bit.
// The read side is first-word fall-through: rd_data shows the oldest word
// whenever empty is low, and rd_en removes it at the next clock edge.
// A write while full or a read while empty is ignored (and flagged by an
// assertion in simulation). Reset (active low, synchronous) empties it.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 64   // power of two
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;

  logic do_wr, do_rd;
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;

  assign empty   = (wptr == rptr);
  assign full    = (wptr[AW-1:0] == rptr[AW-1:0]) && (wptr[AW] != rptr[AW]);
  assign rd_data = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full)
    else $error("sync_fifo: write while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $error("sync_fifo: read while empty");
endmodule
