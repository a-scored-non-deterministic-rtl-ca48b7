// tb_napoly_ctrl: self-checking test of the mode controller.
//
// Queues stand in for the pattern and input buffers; can_step and the
// report unit's idle flag are driven randomly. Over several runs it checks:
// the mode sequence IDLE -> CONFIG -> RUN -> DRAIN -> IDLE; every
// configuration word except END reaches the array once, in order, and END
// produces run_clear instead; symbols are stepped in order, only when
// can_step is high, one per cycle at most; offset counts 0, 1, 2, ... in the
// cycle after each step; done pulses once per run, only when the report
// unit is idle; and a run of L symbols with can_step always high takes
// exactly L stepping cycles (one symbol per clock).
module tb_napoly_ctrl;
  import napoly_pkg::*;
  import napoly_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  logic pat_empty, pat_pop, in_empty, in_pop;
  cfg_word_t pat_word, cfg_word;
  in_entry_t in_entry;
  logic cfg_valid, run_clear, step, can_step, rep_idle, done;
  sym_t sym;
  offset_t offset;
  mode_e mode;

  int checks = 0, failures = 0;
  cfg_word_t pq[$], expect_cfg[$];
  in_entry_t iq[$];
  int n_done = 0;

  napoly_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  // buffer models: first-word fall-through
  always_comb begin
    pat_empty = (pq.size() == 0);
    pat_word  = pat_empty ? '0 : pq[0];
    in_empty  = (iq.size() == 0);
    in_entry  = in_empty ? '0 : iq[0];
  end

  always @(posedge clk) begin
    if (pat_pop) void'(pq.pop_front());
    if (in_pop)  void'(iq.pop_front());
  end

  task automatic do_run(int n_cfg, int len, bit full_rate);
    automatic int stepped = 0, step_cycles = 0, cycles = 0;
    automatic bit seen_cfg = 0;
    automatic sym_t syms[$];
    for (int i = 0; i < n_cfg; i++) begin
      automatic cfg_word_t w = mk(cfg_op_e'($urandom_range(0, 4)), $urandom_range(0, 999),
                                  $urandom_range(0, 7), $urandom_range(0, 1), $urandom);
      pq.push_back(w); expect_cfg.push_back(w);
    end
    pq.push_back(mk(OP_END, 0, 0, 0, 0));
    for (int i = 0; i < len; i++) begin
      automatic in_entry_t e;
      e.sym = sym_t'($urandom); e.last = (i == len - 1);
      iq.push_back(e); syms.push_back(e.sym);
    end
    #1;
    while (1) begin
      can_step = full_rate || ($urandom_range(0, 3) != 0);
      rep_idle = full_rate || ($urandom_range(0, 3) == 0);
      #1;
      check(!(step && !can_step), "step only with can_step");
      check(in_pop == step && pat_pop == (cfg_valid || run_clear), "pop strobes");
      if (mode == MODE_CONFIG) seen_cfg = 1;
      if (cfg_valid) begin
        check(expect_cfg.size() != 0 && cfg_word == expect_cfg[0], "config word order");
        void'(expect_cfg.pop_front());
      end
      if (run_clear) check(expect_cfg.size() == 0 && pat_word.op == OP_END, "END ends config");
      if (step) begin
        check(mode == MODE_RUN, "step only in RUN");
        check(sym == syms[0], "symbol order");
        void'(syms.pop_front());
        step_cycles++;
      end
      if (done) begin
        check(mode == MODE_DRAIN && rep_idle && syms.size() == 0, "done in DRAIN when idle");
        n_done++;
      end
      cycles++;
      if (done) begin
        @(posedge clk); #1;
        check(mode == MODE_IDLE, "back to IDLE");
        break;
      end
      @(posedge clk); #1;
      if (step_cycles > 0 && mode inside {MODE_RUN, MODE_DRAIN})
        check(offset == offset_t'(step_cycles - 1), "offset of the state's symbol");
      if (cycles > 5000) break;
    end
    check(seen_cfg, "passed through CONFIG");
    check(step_cycles == len, "all symbols stepped");
  endtask

  initial begin
    rst_n = 1'b0; can_step = 1'b1; rep_idle = 1'b1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    #1 check(mode == MODE_IDLE && !pat_pop && !in_pop, "IDLE after reset");
    // symbols present without a configuration are not consumed
    iq.push_back('{last: 1'b0, sym: 8'h41});
    repeat (4) @(posedge clk);
    #1 check(iq.size() == 1 && mode == MODE_IDLE, "no streaming before END");
    iq.delete();
    for (int r = 0; r < 30; r++) do_run($urandom_range(0, 12), $urandom_range(1, 30), r % 2 == 0);
    // rate: with can_step always high the stream takes one cycle per symbol
    begin
      automatic longint t0, t1;
      for (int i = 0; i < 20; i++) iq.push_back('{last: (i == 19), sym: sym_t'(i)});
      pq.push_back(mk(OP_END, 0, 0, 0, 0));
      can_step = 1; rep_idle = 1;
      wait (mode == MODE_RUN); t0 = $time;
      wait (mode == MODE_DRAIN); t1 = $time;
      check((t1 - t0) / 10 == 20, "one symbol per clock cycle");
      @(posedge clk); #1;
      @(posedge clk); #1;
      n_done++;
    end
    check(n_done == 31, "done once per run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
