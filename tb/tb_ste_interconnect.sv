// tb_ste_interconnect: self-checking test of the fan-in interconnect.
//
// Programs random sources and enables into every local wire (including
// writes to out-of-range STEs and slots, which must be ignored), drives
// random activity and scores on the global bus, and checks every local wire
// against a model. OP_CLEAR must then disable all wires.
module tb_ste_interconnect;
  import napoly_pkg::*;
  import napoly_ref_pkg::*;
  localparam int N = 16;
  localparam int MAX_FAN = 3;

  logic clk = 1'b0;
  logic rst_n;
  logic cfg_valid;
  cfg_word_t cfg_word;
  logic   [N-1:0] bus_act;
  score_t [N-1:0] bus_score;
  logic   [N-1:0][MAX_FAN-1:0] fan_act;
  score_t [N-1:0][MAX_FAN-1:0] fan_score;

  int checks = 0, failures = 0;
  int m_src [N][MAX_FAN];
  bit m_en  [N][MAX_FAN];

  ste_interconnect #(.N(N), .MAX_FAN(MAX_FAN)) dut (.*);

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

  task automatic cfg(cfg_word_t w);
    cfg_valid = 1'b1; cfg_word = w;
    @(posedge clk); #1;
    cfg_valid = 1'b0;
  endtask

  task automatic compare_all();
    for (int t = 0; t < 20; t++) begin
      bus_act = N'($urandom);
      for (int i = 0; i < N; i++) bus_score[i] = score_t'($urandom);
      #1;
      for (int d = 0; d < N; d++)
        for (int k = 0; k < MAX_FAN; k++) begin
          check(fan_act[d][k] == (m_en[d][k] && bus_act[m_src[d][k]]), "fan_act");
          if (m_en[d][k]) check(fan_score[d][k] == bus_score[m_src[d][k]], "fan_score");
        end
    end
  endtask

  initial begin
    rst_n = 1'b0; cfg_valid = 1'b0; cfg_word = '0; bus_act = '0; bus_score = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    foreach (m_en[d, k]) begin m_en[d][k] = 0; m_src[d][k] = 0; end
    compare_all();
    for (int r = 0; r < 3; r++) begin
      for (int n = 0; n < 120; n++) begin
        automatic int d = $urandom_range(0, N);          // N itself is out of range
        automatic int k = $urandom_range(0, MAX_FAN);    // MAX_FAN itself is out of range
        automatic int s = $urandom_range(0, N - 1);
        automatic bit e = $urandom_range(0, 3) != 0;
        cfg(mk(OP_FAN, d, k, e, s));
        if (d < N && k < MAX_FAN) begin m_src[d][k] = s; m_en[d][k] = e; end
      end
      // words of other kinds must not touch the wiring
      cfg(mk(OP_SCORE, 1, 0, 1, 5));
      cfg(mk(OP_SYM, 2, 1, 0, 32'hFFFF_FFFF));
      compare_all();
    end
    cfg(mk(OP_CLEAR, 0, 0, 0, 0));
    foreach (m_en[d, k]) m_en[d][k] = 0;
    compare_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
