// tb_sync_fifo: self-checking test of the synchronous FIFO used for the
// pattern, input and output buffers.
//
// Random pushes and pops (never a push when full nor a pop when empty) are
// compared against a queue model: the head word, the empty flag and the
// full flag are checked every cycle, and a fill-to-full / drain-to-empty
// pass checks that exactly DEPTH words fit.
module tb_sync_fifo;
  localparam int WIDTH = 12;
  localparam int DEPTH = 8;

  logic clk = 1'b0;
  logic rst_n;
  logic wr_en, rd_en, full, empty;
  logic [WIDTH-1:0] wr_data, rd_data;

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model [$];

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic compare();
    check(empty == (model.size() == 0), "empty flag");
    check(full == (model.size() == DEPTH), "full flag");
    if (model.size() != 0) check(rd_data == model[0], "head word");
  endtask

  initial begin
    rst_n = 1'b0; wr_en = 1'b0; rd_en = 1'b0; wr_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // fill to full
    for (int i = 0; i < DEPTH; i++) begin
      compare();
      wr_en = 1'b1; wr_data = WIDTH'(i * 37 + 5);
      @(posedge clk); #1;
      model.push_back(WIDTH'(i * 37 + 5));
    end
    wr_en = 1'b0;
    compare();
    check(full, "full after DEPTH writes");
    // drain to empty
    while (model.size() != 0) begin
      compare();
      rd_en = 1'b1;
      @(posedge clk); #1;
      void'(model.pop_front());
    end
    rd_en = 1'b0;
    compare();
    check(empty, "empty after draining");
    // random traffic
    for (int n = 0; n < 3000; n++) begin
      compare();
      wr_en   = !full && ($urandom_range(0, 99) < 55);
      rd_en   = !empty && ($urandom_range(0, 99) < 50);
      wr_data = WIDTH'($urandom);
      @(posedge clk); #1;
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
    end
    wr_en = 1'b0; rd_en = 1'b0;
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
