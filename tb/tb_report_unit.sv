// tb_report_unit: self-checking test of the report serialiser.
//
// Random accept vectors and scores are presented as the array would hold
// them after a step; the output side is randomly not ready. Checked: the
// records come out lowest STE id first with the right offset and score,
// exactly one per accepting STE per symbol, at most one per cycle, and
// can_step is high exactly when nothing of the current symbol remains after
// the cycle's record. A vector with k accepting STEs and a ready output
// must take exactly k cycles (one record per cycle).
module tb_report_unit;
  import napoly_pkg::*;
  localparam int N = 16;

  logic clk = 1'b0;
  logic rst_n;
  logic   [N-1:0] accept_vec;
  score_t [N-1:0] scores;
  offset_t offset;
  logic step, run_clear, out_valid, out_ready, can_step, idle;
  report_t out_rec;

  int checks = 0, failures = 0;
  int stalls = 0;

  report_unit #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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

  initial begin
    rst_n = 1'b0; accept_vec = '0; scores = '0; offset = '0; step = 0; run_clear = 0;
    out_ready = 1'b1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    check(idle && can_step && !out_valid, "idle after reset");

    for (int v = 0; v < 400; v++) begin
      automatic int expect_ids[$];
      automatic int cycles = 0;
      automatic bit ready_always = (v % 3 == 0);
      // new array state: step pulse clears the done mask
      step = 1'b1; @(posedge clk); #1; step = 1'b0;
      accept_vec = (v % 5 == 0) ? '0 : N'($urandom) & N'($urandom);
      for (int i = 0; i < N; i++) scores[i] = score_t'($urandom);
      offset = offset_t'(v);
      for (int i = 0; i < N; i++) if (accept_vec[i]) expect_ids.push_back(i);
      forever begin
        out_ready = ready_always || ($urandom_range(0, 2) != 0);
        #1;
        begin
          automatic bit last = (expect_ids.size() == 1) && out_ready;
          check(can_step == ((expect_ids.size() == 0) || last), "can_step");
          check(idle == (expect_ids.size() == 0), "idle");
          check(out_valid == ((expect_ids.size() != 0) && out_ready), "out_valid");
        end
        if (!can_step) stalls++;
        if (expect_ids.size() == 0) break;
        if (out_valid) begin
          automatic int id = expect_ids.pop_front();
          check(int'(out_rec.ste) == id, "record id in ascending order");
          check(out_rec.offset == offset_t'(v), "record offset");
          check(out_rec.score == scores[id], "record score");
        end
        cycles++;
        @(posedge clk); #1;
      end
      if (ready_always) check(cycles == $countones(accept_vec), "one record per cycle");
    end
    // run_clear also clears the done mask: a still-set vector is reported anew
    accept_vec = N'(16'h0003);
    @(posedge clk); #1;   // record for STE 0
    run_clear = 1'b1; out_ready = 1'b0;
    @(posedge clk); #1; run_clear = 1'b0; #1;
    check(!idle && !can_step, "run_clear re-arms the done mask");
    check(stalls > 0, "stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
