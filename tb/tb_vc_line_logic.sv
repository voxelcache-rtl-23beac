// tb_vc_line_logic: random lookups and inserts on one line, checked against
// a model kept here: per-slot key, pointer, valid and last-use time. The
// expected LRU age of a slot is the number of valid slots used after it.
// The DUT's output line is fed back as its next input. Runs PAIRS = 3 (CPU)
// and PAIRS = 6 (GPU) with a key space small enough to force replacements.
module tb_vc_line_logic;
  import vc_pkg::*;

  int checks = 0, failures = 0;
  int evictions = 0, fills = 0, hits = 0;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- one test harness per configuration ----
  `define LINE_TEST(NAME, P)                                                   \
  pair_t       [P-1:0] NAME``_pin, NAME``_pout;                                \
  slot_state_t [P-1:0] NAME``_sin, NAME``_sout;                                \
  key_t  NAME``_key; logic NAME``_wr; ptr_t NAME``_wv, NAME``_rv;              \
  logic  NAME``_hit, NAME``_ev;                                                \
  logic [$clog2(P)-1:0] NAME``_hidx, NAME``_sidx;                              \
  vc_line_logic #(.PAIRS(P)) NAME (                                            \
    .pairs_in(NAME``_pin), .st_in(NAME``_sin), .key(NAME``_key),               \
    .wr(NAME``_wr), .wvalue(NAME``_wv), .hit(NAME``_hit),                      \
    .hit_idx(NAME``_hidx), .rvalue(NAME``_rv), .slot_idx(NAME``_sidx),         \
    .evict(NAME``_ev), .pairs_out(NAME``_pout), .st_out(NAME``_sout));

  `LINE_TEST(u3, 3)
  `LINE_TEST(u6, 6)

  function automatic key_t mk(int i);
    key_t k; k.kx = i; k.ky = -i; k.kz = i * 7; return k;
  endfunction

  `define RUN_LINE(NAME, P, NOPS)                                              \
  begin                                                                        \
    key_t mkey [P]; ptr_t mptr [P]; bit mv [P]; int mt [P];                    \
    int t, kidx, slot, exp_age, mlru;                                          \
    bit mhit;                                                                  \
    for (int s = 0; s < P; s++) begin mv[s] = 0; mt[s] = 0; end                \
    NAME``_pin = '0;                                                           \
    for (int s = 0; s < P; s++) begin                                          \
      NAME``_sin[s].valid = 1'b0; NAME``_sin[s].age = AGE_W'($urandom);        \
    end                                                                        \
    for (t = 1; t <= NOPS; t++) begin                                          \
      kidx = $urandom_range(0, 2 * P);                                         \
      NAME``_key = mk(kidx);                                                   \
      NAME``_wr  = ($urandom_range(0, 2) != 0);                                \
      NAME``_wv  = {$urandom, $urandom} | 64'h1;                               \
      #1;                                                                      \
      mhit = 0; slot = -1;                                                     \
      for (int s = 0; s < P; s++) if (mv[s] && mkey[s] == NAME``_key) begin mhit = 1; slot = s; end \
      checks++;                                                                \
      if (NAME``_hit != mhit) begin failures++; $display("FAIL %m hit t=%0d", t); end \
      checks++;                                                                \
      if (NAME``_rv != (mhit ? mptr[slot] : INVALID_PTR)) begin failures++; $display("FAIL %m rvalue t=%0d", t); end \
      if (mhit) hits++;                                                        \
      if (NAME``_wr && !mhit) begin                                            \
        for (int s = P - 1; s >= 0; s--) if (!mv[s]) slot = s;                 \
        if (slot < 0) begin                                                    \
          mlru = 0;                                                            \
          for (int s = 1; s < P; s++) if (mt[s] < mt[mlru]) mlru = s;          \
          slot = mlru; evictions++;                                            \
          checks++;                                                            \
          if (!NAME``_ev) begin failures++; $display("FAIL %m evict flag t=%0d", t); end \
        end else fills++;                                                      \
        mkey[slot] = NAME``_key; mv[slot] = 1;                                 \
      end                                                                      \
      if (NAME``_wr) mptr[slot] = NAME``_wv;                                   \
      if (slot >= 0) mt[slot] = t;                                             \
      for (int s = 0; s < P; s++) begin                                        \
        checks++;                                                              \
        if (NAME``_sout[s].valid != mv[s]) begin failures++; $display("FAIL %m valid s=%0d t=%0d", s, t); end \
        if (mv[s]) begin                                                       \
          exp_age = 0;                                                         \
          for (int j = 0; j < P; j++) if (mv[j] && mt[j] > mt[s]) exp_age++;   \
          checks++;                                                            \
          if (int'(NAME``_sout[s].age) != exp_age || NAME``_pout[s].key != mkey[s] || NAME``_pout[s].ptr != mptr[s]) begin \
            failures++; $display("FAIL %m slot %0d t=%0d age %0d exp %0d", s, t, NAME``_sout[s].age, exp_age); \
          end                                                                  \
        end                                                                    \
      end                                                                      \
      NAME``_pin = NAME``_pout; NAME``_sin = NAME``_sout;                      \
    end                                                                        \
  end

  initial begin
    `RUN_LINE(u3, 3, 3000)
    `RUN_LINE(u6, 6, 3000)
    checks++;
    if (evictions == 0 || fills == 0 || hits == 0) begin
      failures++; $display("FAIL coverage evictions=%0d fills=%0d hits=%0d", evictions, fills, hits);
    end
    $display("evictions=%0d fills=%0d hits=%0d", evictions, fills, hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
