// tb_ste_array: self-checking test of the STE+ array.
//
// Part 1, a worked example: with match +2 the chain A -> G -> C (C
// accepting) must report score 6 after the input "AGC" and 4 after "GC"
// (every non-accepting state may open a path), nothing after "C", and a mismatch
// state (class "not C and not G", score -1) between A and C lets "ATC"
// reach the accepting state with 2 - 1 + 2 = 3.
// Part 2: random automata (random classes over a 4-letter alphabet, random
// scores, random fan-in, some accepting states) are run on random DNA text
// and the active vector, scores and accept vector are compared with the
// reference model after every symbol. Steps are one symbol per clock.
module tb_ste_array;
  import napoly_pkg::*;
  import napoly_ref_pkg::*;
  localparam int N = 12;
  localparam int MAX_FAN = 3;

  logic clk = 1'b0;
  logic rst_n;
  logic cfg_valid, run_clear, step;
  cfg_word_t cfg_word;
  sym_t sym;
  logic   [N-1:0] act, accept_vec;
  score_t [N-1:0] scores;

  int checks = 0, failures = 0;
  nfa_model m;
  int hits[$];
  byte dna[4] = '{"A", "C", "G", "T"};

  ste_array #(.N(N), .MAX_FAN(MAX_FAN)) dut (.*);

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

  task automatic cfg(cfg_word_t w);
    cfg_valid = 1'b1; cfg_word = w;
    m.apply(w);
    @(posedge clk); #1;
    cfg_valid = 1'b0;
  endtask

  // class made of the given letters
  task automatic set_class(int id, string letters);
    logic [NUM_SYMS-1:0] c = '0;
    for (int i = 0; i < letters.len(); i++) c[letters[i]] = 1'b1;
    for (int k = 0; k < NUM_CHUNK; k++) cfg(mk(OP_SYM, id, k, 0, c[k*CHUNK_W +: CHUNK_W]));
  endtask

  task automatic feed(byte s);
    sym = s; step = 1'b1;
    m.step(int'(s), hits);
    @(posedge clk); #1;
    step = 1'b0;
    for (int i = 0; i < N; i++) begin
      check(act[i] == m.act[i], "active");
      check(int'(scores[i]) == m.sc[i], "score");
    end
    for (int i = 0; i < N; i++) check(accept_vec[i] == (m.act[i] && m.acc[i]), "accept vector");
  endtask

  task automatic start_run();
    run_clear = 1'b1; m.run_clear();
    @(posedge clk); #1;
    run_clear = 1'b0;
  endtask

  initial begin
    m = new(N, MAX_FAN);
    rst_n = 1'b0; cfg_valid = 0; cfg_word = '0; run_clear = 0; step = 0; sym = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // ---- worked example: A(+2) -> G(+2) -> C(+2, accepting); A -> X[^CG](-1) -> C
    cfg(mk(OP_CLEAR, 0, 0, 0, 0));
    set_class(0, "A"); cfg(mk(OP_SCORE, 0, 0, 0, 2));
    set_class(1, "G"); cfg(mk(OP_SCORE, 1, 0, 0, 2));
    cfg(mk(OP_FAN, 1, 0, 1, 0));
    set_class(2, "C"); cfg(mk(OP_SCORE, 2, 0, 1, 2));
    cfg(mk(OP_FAN, 2, 0, 1, 1));
    set_class(3, "AT"); cfg(mk(OP_SCORE, 3, 0, 0, 32'hFFFF));  // -1
    cfg(mk(OP_FAN, 3, 0, 1, 0));
    cfg(mk(OP_FAN, 2, 1, 1, 3));
    start_run();
    feed("A"); feed("G"); feed("C");
    check(accept_vec == N'(1 << 2) && scores[2] == 16'sd6, "AGC scores 6");
    start_run();
    feed("A"); feed("T"); feed("C");
    check(accept_vec == N'(1 << 2) && scores[2] == 16'sd3, "ATC scores 3");
    start_run();
    feed("G");
    check(act[1] && scores[1] == 16'sd2, "G starts its own path with score 2");
    feed("C");
    check(accept_vec == N'(1 << 2) && scores[2] == 16'sd4, "GC scores 4 (path opened at G)");
    start_run();
    feed("C");
    check(accept_vec == '0, "accepting C has no start fan-in");

    // ---- random automata
    for (int r = 0; r < 20; r++) begin
      cfg(mk(OP_CLEAR, 0, 0, 0, 0));
      for (int i = 0; i < N; i++) begin
        automatic string letters = "";
        for (int l = 0; l < 4; l++) if ($urandom_range(0, 2) == 0) letters = {letters, string'(dna[l])};
        set_class(i, letters);
        cfg(mk(OP_SCORE, i, 0, int'($urandom_range(0, 3) == 0), 32'($urandom_range(0, 8) - 4)));
        for (int k = 0; k < MAX_FAN; k++)
          if ($urandom_range(0, 1) == 1) cfg(mk(OP_FAN, i, k, 1, $urandom_range(0, N - 1)));
      end
      start_run();
      for (int t = 0; t < 40; t++) feed(dna[$urandom_range(0, 3)]);
    end
    $display("model: %0d start paths, %0d extended paths", m.n_start_paths, m.n_extended);
    check(m.n_extended > 0 && m.n_start_paths > 0, "both kinds of path occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
