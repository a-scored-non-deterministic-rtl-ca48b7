// napoly_ref_pkg: reference model of the scored NFA array, for testbenches.
//
// nfa_model keeps the same configuration as the hardware (symbol class,
// score, accepting flag, fan-in sources) in plain arrays and computes each
// step with integer arithmetic: a state is enabled by an active fan-in
// source, or always when it is not accepting (start state, score 0); it is
// active when enabled and the symbol is in its class; its score is the
// maximum enabling score plus its own, clamped to 16-bit signed. It also
// builds random configurations as lists of configuration words, and applies
// a word the way the hardware should.
package napoly_ref_pkg;
  import napoly_pkg::*;

  class nfa_model;
    int n, max_fan;
    bit  cls [][NUM_SYMS];
    int  own [];
    bit  acc [];
    int  src [][];
    bit  en  [][];
    bit  act [];
    int  sc  [];
    // statistics
    int  n_start_paths, n_extended, n_saturated;

    function new(int n_, int max_fan_);
      n = n_; max_fan = max_fan_;
      cls = new[n]; own = new[n]; acc = new[n]; src = new[n]; en = new[n];
      act = new[n]; sc = new[n];
      foreach (src[i]) begin src[i] = new[max_fan]; en[i] = new[max_fan]; end
      clear_cfg();
    endfunction

    function void clear_cfg();
      for (int i = 0; i < n; i++) begin
        for (int s = 0; s < NUM_SYMS; s++) cls[i][s] = 0;
        own[i] = 0; acc[i] = 0; act[i] = 0; sc[i] = 0;
        for (int k = 0; k < max_fan; k++) begin src[i][k] = 0; en[i][k] = 0; end
      end
    endfunction

    function void run_clear();
      for (int i = 0; i < n; i++) begin act[i] = 0; sc[i] = 0; end
    endfunction

    function void apply(cfg_word_t w);
      int id = int'(w.ste);
      case (w.op)
        OP_CLEAR: clear_cfg();
        OP_SYM: if (id < n && int'(w.sel) < NUM_CHUNK)
          for (int b = 0; b < CHUNK_W; b++) cls[id][int'(w.sel) * CHUNK_W + b] = w.data[b];
        OP_SCORE: if (id < n) begin
          own[id] = int'($signed(w.data[15:0])); acc[id] = w.flags[0];
        end
        OP_FAN: if (id < n && int'(w.sel) < max_fan) begin
          src[id][w.sel] = int'(w.data) % (1 << $clog2(n));
          en[id][w.sel]  = w.flags[0] && (w.data < n);
        end
        default: ;
      endcase
    endfunction

    // one symbol; returns the ids of the accepting states now active, ascending
    function void step(int sym, ref int hits[$]);
      bit nact [] = new[n];
      int nsc  [] = new[n];
      hits.delete();
      for (int i = 0; i < n; i++) begin
        bit e = !acc[i];
        int best = 0;
        bit from_pred = 0;
        for (int k = 0; k < max_fan; k++)
          if (en[i][k] && act[src[i][k]]) begin
            if (!e || sc[src[i][k]] > best) best = sc[src[i][k]];
            e = 1; from_pred = 1;
          end
        nact[i] = e && cls[i][sym];
        if (nact[i]) begin
          int s = best + own[i];
          if (s > 32767) begin s = 32767; n_saturated++; end
          if (s < -32768) begin s = -32768; n_saturated++; end
          nsc[i] = s;
          if (from_pred) n_extended++; else n_start_paths++;
        end else nsc[i] = 0;
      end
      act = nact; sc = nsc;
      for (int i = 0; i < n; i++) if (act[i] && acc[i]) hits.push_back(i);
    endfunction
  endclass

  function automatic cfg_word_t mk(cfg_op_e op, int ste, int sel, int flags, logic [31:0] data);
    cfg_word_t w;
    w.op = op; w.ste = ste_id_t'(ste); w.sel = 4'(sel); w.flags = 8'(flags); w.data = data;
    return w;
  endfunction
endpackage
