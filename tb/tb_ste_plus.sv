// tb_ste_plus: self-checking test of one scored STE+.
//
// Directed checks: the symbol class written chunk by chunk selects exactly
// the configured bytes; a non-accepting STE+ starts a path on its own (start
// fan-in, incoming score 0); an accepting STE+ needs an active predecessor;
// the best (maximum) of the active incoming scores is the one extended;
// negative incoming scores lose to the start fan-in's 0; the sum saturates.
// Then random fan-in activity and scores are compared against an
// independent model of the same rule.
module tb_ste_plus;
  import napoly_pkg::*;
  localparam int MAX_FAN = 3;

  logic clk = 1'b0;
  logic rst_n;
  logic cfg_clear, cfg_sel, cfg_sym_we, cfg_score_we, cfg_accept;
  logic [$clog2(NUM_CHUNK)-1:0] cfg_chunk;
  logic [CHUNK_W-1:0] cfg_bits;
  score_t cfg_score;
  logic run_clear, step;
  sym_t sym;
  logic [MAX_FAN-1:0] fan_act;
  score_t [MAX_FAN-1:0] fan_score;
  logic active, accepting;
  score_t score;

  int checks = 0, failures = 0;
  logic [NUM_SYMS-1:0] cls;

  ste_plus #(.MAX_FAN(MAX_FAN)) dut (.*);

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

  task automatic write_class(logic [NUM_SYMS-1:0] c);
    for (int k = 0; k < NUM_CHUNK; k++) begin
      cfg_sel = 1'b1; cfg_sym_we = 1'b1; cfg_chunk = k[$clog2(NUM_CHUNK)-1:0];
      cfg_bits = c[k*CHUNK_W +: CHUNK_W];
      @(posedge clk); #1;
    end
    cfg_sel = 1'b0; cfg_sym_we = 1'b0;
  endtask

  task automatic write_score(score_t s, logic acc);
    cfg_sel = 1'b1; cfg_score_we = 1'b1; cfg_score = s; cfg_accept = acc;
    @(posedge clk); #1;
    cfg_sel = 1'b0; cfg_score_we = 1'b0;
  endtask

  // drive one step and return the result
  task automatic do_step(sym_t s, logic [MAX_FAN-1:0] a, score_t [MAX_FAN-1:0] f);
    sym = s; fan_act = a; fan_score = f; step = 1'b1;
    @(posedge clk); #1;
    step = 1'b0;
  endtask

  // independent reference of the STE+ rule
  function automatic void model(logic acc, score_t own, logic m,
                                logic [MAX_FAN-1:0] a, score_t [MAX_FAN-1:0] f,
                                output logic e_act, output score_t e_sc);
    int best;
    bit en;
    longint sum;
    en = !acc;
    best = 0;
    for (int k = 0; k < MAX_FAN; k++)
      if (a[k]) begin
        if (!en) best = int'(f[k]);
        else if (int'(f[k]) > best) best = int'(f[k]);
        en = 1;
      end
    e_act = en && m;
    sum = longint'(best) + longint'(own);
    if (sum > 32767) sum = 32767;
    if (sum < -32768) sum = -32768;
    e_sc = e_act ? score_t'(sum) : '0;
  endfunction

  initial begin
    logic e_act;
    score_t e_sc;
    logic acc;
    score_t own;
    rst_n = 1'b0; cfg_clear = 0; cfg_sel = 0; cfg_sym_we = 0; cfg_score_we = 0;
    cfg_accept = 0; cfg_chunk = '0; cfg_bits = '0; cfg_score = '0;
    run_clear = 0; step = 0; sym = '0; fan_act = '0; fan_score = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    check(!active && !accepting && score == 0, "reset state");

    // class = {'A','C', 0xFF}; score +2, not accepting
    cls = '0; cls[8'h41] = 1; cls[8'h43] = 1; cls[8'hFF] = 1;
    write_class(cls);
    write_score(16'sd2, 1'b0);
    for (int s = 0; s < NUM_SYMS; s++) begin
      do_step(sym_t'(s), '0, '0);
      check(active == cls[s], "class membership via start fan-in");
      check(score == (cls[s] ? 16'sd2 : 16'sd0), "start path score");
    end
    // best incoming score is extended
    do_step(8'h41, 3'b101, '{16'sd7, 16'sd50, 16'sd3});
    check(active && score == 16'sd9, "max of active fan-ins (inactive 50 ignored)");
    // negative incoming loses against the start fan-in's 0
    do_step(8'h41, 3'b001, '{16'sd0, 16'sd0, -16'sd9});
    check(active && score == 16'sd2, "start fan-in 0 beats negative incoming");
    // saturation
    do_step(8'h43, 3'b010, '{16'sd0, 16'sd32767, 16'sd0});
    check(active && score == 16'sd32767, "positive saturation");
    // run_clear
    run_clear = 1; @(posedge clk); #1; run_clear = 0;
    check(!active && score == 0, "run_clear");

    // accepting STE+: no start fan-in, negative own score
    write_score(-16'sd1, 1'b1);
    check(accepting, "accepting flag");
    do_step(8'h41, '0, '0);
    check(!active, "accepting STE+ without predecessor stays idle");
    do_step(8'h41, 3'b100, '{-16'sd5, 16'sd0, 16'sd0});
    check(active && score == -16'sd6, "accepting STE+ keeps negative path score");
    do_step(8'h42, 3'b100, '{-16'sd5, 16'sd0, 16'sd0});
    check(!active && score == 0, "mismatch deactivates");
    do_step(8'hFF, 3'b011, '{16'sd0, -16'sd32768, -16'sd32768});
    check(active && score == -16'sd32768, "negative saturation");

    // random
    for (int n = 0; n < 400; n++) begin
      logic [MAX_FAN-1:0] a;
      score_t [MAX_FAN-1:0] f;
      sym_t s;
      if (n % 50 == 0) begin
        for (int b = 0; b < NUM_SYMS; b++) cls[b] = ($urandom_range(0, 2) == 0);
        write_class(cls);
        acc = $urandom_range(0, 1) == 1;
        own = score_t'($urandom_range(0, 40) - 20);
        write_score(own, acc);
      end
      a = MAX_FAN'($urandom);
      for (int k = 0; k < MAX_FAN; k++) f[k] = score_t'($urandom_range(0, 200) - 100);
      s = sym_t'($urandom);
      model(acc, own, cls[s], a, f, e_act, e_sc);
      do_step(s, a, f);
      check(active == e_act && score == e_sc, "random step");
    end

    // cfg_clear wipes configuration
    cfg_clear = 1; @(posedge clk); #1; cfg_clear = 0;
    check(!accepting && !active, "cfg_clear");
    do_step(8'h41, '1, '{16'sd1, 16'sd1, 16'sd1});
    check(!active, "empty class after clear");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
