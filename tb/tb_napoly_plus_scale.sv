// tb_napoly_plus_scale: the end-to-end test of tb_napoly_plus on a larger
// array with more fan-in wires (4096 STE+s, 8 fan-in wires each), a step
// along the published size sweep (1K to 64K STE+s, varied fan-out). The
// random automaton fills all 4096 STE+s and uses up to 8 wires per STE+.
//
// The testbench plays the memory side: it writes configuration words into
// the pattern buffer and symbols into the input buffer whenever they have
// room, and reads report records from the output buffer, sometimes pausing
// so that the buffer fills up. Every configuration word is also applied to
// a reference model, which predicts the exact record stream (ascending STE
// id per symbol, symbols in order). Runs:
//   1. the worked example A(+2) -> G(+2) -> C(+2, accepting), with a
//      mismatch state (-1) and a gap-like self loop (-2), placed at the far
//      end of the array: "AGC" must score 6;
//   2. a random automaton over the whole array on random DNA text;
//   3. the same automaton again on new text (END only, no reconfiguration);
//   4. a saturating chain (large positive scores in a self loop).
// Mechanisms counted, each must occur: reconfiguration, a run started
// without reconfiguration, stalls because several accepting STE+s fired on
// one symbol, stalls because the output buffer was full, paths opened by the
// start fan-in, paths extended through fan-in wires, score saturation.
module tb_napoly_plus_scale;
  import napoly_pkg::*;
  import napoly_ref_pkg::*;
  localparam int N = 4096;
  localparam int MAX_FAN = 8;

  logic clk = 1'b0;
  logic rst_n;
  logic pat_wr, pat_full, in_wr, in_full, out_rd, out_empty, done;
  cfg_word_t pat_data;
  in_entry_t in_data;
  report_t out_data;
  mode_e mode;

  napoly_plus #(.N(N), .MAX_FAN(MAX_FAN)) dut (.*);

  int checks = 0, failures = 0;
  nfa_model m;
  cfg_word_t pq[$];
  in_entry_t iq[$];
  report_t expect_q[$];
  int reader_pause = 0;    // percent of cycles the reader does not read
  int n_records = 0;
  // mechanism counters
  int n_reconfig = 0, n_rerun = 0, n_multi_stall = 0, n_full_stall = 0;
  byte dna[4] = '{"A", "C", "G", "T"};

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // memory-side writers and reader
  always_ff @(posedge clk) begin
    if (out_rd) begin
      n_records++;
      if (expect_q.size() == 0) check(0, "unexpected record");
      else begin
        if (out_data != expect_q[0] && failures < 5) $display("got %0d/%0d/%0d exp %0d/%0d/%0d", out_data.ste, out_data.offset, out_data.score, expect_q[0].ste, expect_q[0].offset, expect_q[0].score);
        check(out_data == expect_q[0], "record matches model");
        void'(expect_q.pop_front());
      end
    end
    if (mode == MODE_RUN && !dut.in_empty && !dut.can_step) begin
      if (dut.out_full) n_full_stall++;
      else n_multi_stall++;
    end
  end
  // writers change their outputs at the falling edge; full only changes at
  // the rising edge, so a word offered here is taken at the next rising edge
  always @(negedge clk) begin
    pat_wr <= 1'b0;
    in_wr  <= 1'b0;
    if (rst_n && pq.size() != 0 && !pat_full) begin
      pat_wr <= 1'b1; pat_data <= pq.pop_front();
    end
    if (rst_n && iq.size() != 0 && !in_full) begin
      in_wr <= 1'b1; in_data <= iq.pop_front();
    end
  end
  always @(negedge clk) out_rd <= rst_n && !out_empty && ($urandom_range(0, 99) >= reader_pause);

  task automatic cfg(cfg_word_t w);
    pq.push_back(w);
    m.apply(w);
  endtask

  task automatic set_class(int id, string letters);
    logic [CHUNK_W-1:0] c = '0;   // letters A..T all lie in chunk 2 (0x40-0x5F)
    for (int i = 0; i < letters.len(); i++) c[5'(letters[i] - 8'h40)] = 1'b1;
    cfg(mk(OP_SYM, id, 2, 0, c));
  endtask

  // queue a stream, predict its records, wait for done
  task automatic run_stream(string text);
    automatic int hits[$];
    automatic int t0 = 0;
    cfg(mk(OP_END, 0, 0, 0, 0));
    m.run_clear();
    for (int i = 0; i < text.len(); i++) begin
      automatic in_entry_t e;
      e.sym = text[i]; e.last = (i == text.len() - 1);
      iq.push_back(e);
      m.step(int'(text[i]), hits);
      foreach (hits[h]) expect_q.push_back('{ste: ste_id_t'(hits[h]), offset: offset_t'(i),
                                             score: score_t'(m.sc[hits[h]])});
    end
    while (!done) begin
      @(posedge clk);
      if (++t0 > 200000) break;
    end
    // let the reader empty the output buffer
    repeat (2 * 64 + 10) @(posedge clk);
    wait (out_empty);
    repeat (3) @(posedge clk);
    check(expect_q.size() == 0, "all predicted records seen");
    check(mode == MODE_IDLE, "back to IDLE");
  endtask

  function automatic string rand_dna(int len);
    string s = "";
    for (int i = 0; i < len; i++) s = {s, string'(dna[$urandom_range(0, 3)])};
    return s;
  endfunction

  initial begin
    m = new(N, MAX_FAN);
    rst_n = 1'b0; pat_wr = 1'b0; in_wr = 1'b0; pat_data = '0; in_data = '0; out_rd = 1'b0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;

    // ---- 1: worked example at the end of the array
    n_reconfig++;
    cfg(mk(OP_CLEAR, 0, 0, 0, 0));
    set_class(N - 4, "A");  cfg(mk(OP_SCORE, N - 4, 0, 0, 2));
    set_class(N - 3, "G");  cfg(mk(OP_SCORE, N - 3, 0, 0, 2));
    cfg(mk(OP_FAN, N - 3, 0, 1, N - 4));
    set_class(N - 2, "AT"); cfg(mk(OP_SCORE, N - 2, 0, 0, 32'hFFFF));      // mismatch, -1
    cfg(mk(OP_FAN, N - 2, 0, 1, N - 4));
    set_class(N - 5, "ACGT"); cfg(mk(OP_SCORE, N - 5, 0, 0, 32'hFFFE));    // gap, -2
    cfg(mk(OP_FAN, N - 5, 0, 1, N - 3)); cfg(mk(OP_FAN, N - 5, 1, 1, N - 5));
    set_class(N - 1, "C");  cfg(mk(OP_SCORE, N - 1, 0, 1, 2));             // accepting
    cfg(mk(OP_FAN, N - 1, 0, 1, N - 3)); cfg(mk(OP_FAN, N - 1, 1, 1, N - 2));
    cfg(mk(OP_FAN, N - 1, 2, 1, N - 5));
    run_stream("AGC");
    check(n_records == 1, "AGC gives one record");
    begin
      automatic int hits[$];
      // model cross-check of the worked example's number
      m.run_clear(); m.step("A", hits); m.step("G", hits); m.step("C", hits);
      check(hits.size() == 1 && m.sc[N - 1] == 6, "AGC scores 6");
    end
    $display("phase 1 done at %0t records %0d", $time, n_records);
    run_stream("TTAGCAATCAGTTC");
    n_rerun++;

    // ---- 2: random automaton over the whole array
    n_reconfig++;
    cfg(mk(OP_CLEAR, 0, 0, 0, 0));
    for (int i = 0; i < N; i++) begin
      automatic string letters = "";
      automatic bit acc = ($urandom_range(0, 99) < 3);
      for (int l = 0; l < 4; l++) if ($urandom_range(0, 2) == 0) letters = {letters, string'(dna[l])};
      set_class(i, letters);
      cfg(mk(OP_SCORE, i, 0, int'(acc), 32'($urandom_range(0, 6) - 3)));
      for (int k = 0; k < MAX_FAN; k++)
        if ($urandom_range(0, 2) != 0) cfg(mk(OP_FAN, i, k, 1, $urandom_range(0, N - 1)));
    end
    reader_pause = 60;
    run_stream(rand_dna(200));

    // ---- 3: same automaton, new text, no reconfiguration
    reader_pause = 0;
    run_stream(rand_dna(200));
    n_rerun++;

    // ---- 4: saturation
    n_reconfig++;
    cfg(mk(OP_CLEAR, 0, 0, 0, 0));
    set_class(7, "A"); cfg(mk(OP_SCORE, 7, 0, 0, 30000));
    cfg(mk(OP_FAN, 7, 3, 1, 7));
    set_class(900, "AC"); cfg(mk(OP_SCORE, 900, 0, 1, 1));
    cfg(mk(OP_FAN, 900, 0, 1, 7));
    run_stream("AAAAC");

    $display("records=%0d reconfig=%0d rerun=%0d multi_accept_stall=%0d full_stall=%0d start_paths=%0d extended=%0d saturated=%0d",
             n_records, n_reconfig, n_rerun, n_multi_stall, n_full_stall,
             m.n_start_paths, m.n_extended, m.n_saturated);
    check(n_reconfig > 0, "reconfiguration happened");
    check(n_rerun > 0, "run without reconfiguration happened");
    check(n_multi_stall > 0, "stall for several accepting STE+s happened");
    check(n_full_stall > 0, "stall for a full output buffer happened");
    check(m.n_start_paths > 0, "path opened by the start fan-in happened");
    check(m.n_extended > 0, "path extended through a fan-in happened");
    check(m.n_saturated > 0, "score saturation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
