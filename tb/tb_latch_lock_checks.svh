// Checks shared by the end-to-end testbenches of latch_lock_top. Included
// inside a testbench module that has already declared LANES, NLAT, NB, the
// signals clk, din, dout, key, scan_en, test_mode, scan_in, scan_out, fuse,
// and instantiated the locked group as dut. See tb_latch_lock_top.sv for
// what is checked and how the expected values are derived.
  int checks = 0, failures = 0;
  int m_correct = 0, m_equiv = 0, m_cdelay = 0, m_diverge = 0, m_reset = 0;
  int m_ldecoy = 0, m_observe = 0, m_control = 0, m_fuse = 0;

  // Input history: hist[k] is din as sampled at rising edge k.
  word_t [LANES-1:0] hist [0:4095];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    hist[(cyc + 1) % 4096] <= din;
  end

  function automatic word_t [LANES-1:0] rand_words();
    word_t [LANES-1:0] w;
    for (int i = 0; i < LANES; i++) w[i] = word_t'($urandom);
    return w;
  endfunction

  // ---------------------------------------------------------------- keys
  latch_mode_e m_l1, m_l2, m_dd, m_ld;

  function automatic logic [2*NLAT-1:0] make_key(latch_mode_e l1, latch_mode_e l2,
                                                 latch_mode_e dd, latch_mode_e ld);
    logic [2*NLAT-1:0] k;
    for (int i = 0; i < LANES; i++) begin
      logic [1:0] m0, m1, m2;
      m0 = l1; m1 = l2; m2 = (i % 2 == 0) ? dd : ld;
      // Latch j takes key[2j] as Key0 and key[2j+1] as Key1.
      {k[2*(3*i)],   k[2*(3*i)+1]}   = m0;
      {k[2*(3*i+1)], k[2*(3*i+1)+1]} = m1;
      {k[2*(3*i+2)], k[2*(3*i+2)+1]} = m2;
    end
    return k;
  endfunction

  task automatic set_key(latch_mode_e l1, latch_mode_e l2, latch_mode_e dd, latch_mode_e ld);
    m_l1 = l1; m_l2 = l2; m_dd = dd; m_ld = ld;
    key = make_key(l1, l2, dd, ld);
  endtask

  // Cycle delay of a path from the input to the output register; -1 if a
  // latch on it is held in reset.
  function automatic int cycle_delay(latch_mode_e path[]);
    byte ph[$];
    byte prev;
    int trans = 0;
    ph.push_back("P");
    foreach (path[n]) begin
      if (path[n] == LK_RESET) return -1;
      if (path[n] == LK_POS) ph.push_back("P");
      if (path[n] == LK_NEG) ph.push_back("N");
    end
    ph.push_back("N");
    ph.push_back("P");
    prev = ph[0];
    foreach (ph[n]) begin
      if (ph[n] != prev) trans++;
      prev = ph[n];
    end
    return trans / 2;
  endfunction

  // ------------------------------------------------------------ reference
  function automatic word_t f_a(word_t x);
    return (x ^ {x[DATA_W-2:0], x[DATA_W-1]}) + 8'h5A;
  endfunction
  function automatic word_t f_b(word_t x, word_t nb);
    return (x + (nb & 8'hC3)) ^ 8'h1F;
  endfunction
  function automatic word_t f_c(word_t x);
    return {x[3:0], x[7:4]} ^ (x >> 1);
  endfunction
  function automatic word_t f_d(word_t x);
    return x + {x[0], x[7:1]} + 8'h33;
  endfunction
  function automatic word_t cone(word_t x, word_t y, int lane);
    word_t r;
    for (int b = 0; b < DATA_W; b++) r[b] = x[b] & y[(b + 1) % DATA_W];
    return r ^ (8'hA5 ^ 8'(8'h11 * 8'(lane)));
  endfunction

  // Value of the converted register (L2 output) given the input register.
  function automatic word_t reg_val(word_t [LANES-1:0] v, int i);
    return f_b(f_a(v[i]), f_a(v[(i + LANES - 1) % LANES]));
  endfunction

  // Expected dout of lane i after rising edge k.
  function automatic word_t expect_lane(int i, int k);
    latch_mode_e path[];
    int d;
    word_t l2v, dec;
    word_t [LANES-1:0] v1, v2;
    v1 = hist[(k - 1 + 4096) % 4096];
    v2 = hist[(k - 2 + 4096) % 4096];
    if (i % 2 == 0) path = '{m_l1, m_l2, m_dd};
    else            path = '{m_l1, m_l2};
    if (i % 2 == 0 && m_dd == LK_RESET) return f_d('0);
    if (m_l2 == LK_RESET) return f_d(f_c('0));
    d = cycle_delay(path);
    l2v = reg_val(d == 2 ? v2 : v1, i);
    dec = '0;
    if (i % 2 == 1 && m_ld == LK_CLEAR)
      // Decoy transparent: its cone sees L1 (open, holding the newest
      // input) and the next lane's L2.
      dec = cone(f_a(v1[i]), reg_val(v2, (i + 1) % LANES), i);
    return f_d(f_c(l2v ^ dec));
  endfunction

  // Checks dout over n cycles; returns the number of lane-cycles where dout
  // differs from the unlocked function.
  task automatic run_and_check(int n, string what, output int diverged);
    diverged = 0;
    // Flush: let the latches settle under the new key.
    repeat (4) begin @(negedge clk); din = rand_words(); end
    repeat (n) begin
      @(negedge clk);
      for (int i = 0; i < LANES; i++) begin
        word_t e, u;
        word_t [LANES-1:0] v2;
        e = expect_lane(i, cyc);
        v2 = hist[(cyc - 2 + 4096) % 4096];
        u = f_d(f_c(reg_val(v2, i)));
        if (dout[i] != u) diverged++;
        checks++;
        if (dout[i] !== e) begin
          failures++;
          if (failures < 20)
            $display("FAIL %s cycle %0d lane %0d: dout=%h want %h", what, cyc, i, dout[i], e);
        end
      end
      din = rand_words();
    end
  endtask

  int dv;
  word_t [LANES-1:0] x;
  logic [NB-1:0] chain_exp, chain_got, pattern;

  initial begin
    scan_en = 0; test_mode = 0; scan_in = 0; fuse = 0;
    din = '0;

    // Correct key.
    set_key(LK_NEG, LK_POS, LK_CLEAR, LK_RESET);
    run_and_check(40, "correct key", dv);
    m_correct++;
    checks++; if (dv != 0) failures++;

    // Path-delay decoy on either phase: equivalent key.
    set_key(LK_NEG, LK_POS, LK_POS, LK_RESET);
    run_and_check(30, "decoy pos", dv);
    checks++; if (dv != 0) failures++; else m_equiv++;
    set_key(LK_NEG, LK_POS, LK_NEG, LK_RESET);
    run_and_check(30, "decoy neg", dv);
    checks++; if (dv != 0) failures++; else m_equiv++;

    // Wrong phases: one cycle of latency instead of two.
    set_key(LK_POS, LK_NEG, LK_CLEAR, LK_RESET);
    run_and_check(30, "swapped phases", dv);
    m_cdelay++; if (dv > 0) m_diverge++;
    set_key(LK_POS, LK_POS, LK_CLEAR, LK_RESET);
    run_and_check(30, "both positive", dv);
    m_cdelay++; if (dv > 0) m_diverge++;
    set_key(LK_CLEAR, LK_CLEAR, LK_CLEAR, LK_RESET);
    run_and_check(30, "all clear", dv);
    m_cdelay++; if (dv > 0) m_diverge++;
    set_key(LK_NEG, LK_NEG, LK_NEG, LK_RESET);
    run_and_check(30, "both negative", dv);
    m_cdelay++; if (dv > 0) m_diverge++;

    // Real latch and delay decoy held in reset.
    set_key(LK_NEG, LK_RESET, LK_CLEAR, LK_RESET);
    run_and_check(20, "L2 reset", dv);
    m_reset++;
    set_key(LK_NEG, LK_POS, LK_RESET, LK_RESET);
    run_and_check(20, "delay decoy reset", dv);
    m_reset++;

    // Logic decoy switched on.
    set_key(LK_NEG, LK_POS, LK_CLEAR, LK_CLEAR);
    run_and_check(40, "logic decoy on", dv);
    if (dv > 0) m_ldecoy++;

    // ---------------------------------------------------------- scan
    set_key(LK_NEG, LK_POS, LK_CLEAR, LK_RESET);
    // Observe: hold a constant input, let the test points capture.
    for (int i = 0; i < LANES; i++) x[i] = 8'($urandom);
    @(negedge clk); din = x;
    repeat (5) @(negedge clk);
    for (int i = 0; i < LANES; i++) begin
      word_t r1, r2;
      r1 = f_a(x[i]);
      r2 = reg_val(x, i);
      chain_exp[(3*i)*DATA_W +: DATA_W]   = r1;
      chain_exp[(3*i+1)*DATA_W +: DATA_W] = r2;
      chain_exp[(3*i+2)*DATA_W +: DATA_W] = (i % 2 == 0) ? f_c(r2) : '0;
    end
    scan_en = 1;
    for (int s = 0; s < NB; s++) begin
      chain_got[NB-1-s] = scan_out;
      @(negedge clk);
    end
    scan_en = 0;
    checks++;
    if (chain_got !== chain_exp) begin
      failures++;
      $display("FAIL scan observe: got %h want %h", chain_got, chain_exp);
    end else m_observe++;

    // Control: shift in a pattern and let it drive the latch outputs.
    pattern = '0;
    for (int w = 0; w < NB; w++) pattern[w] = 1'($urandom);
    test_mode = 1; scan_en = 1;
    for (int s = NB - 1; s >= 0; s--) begin
      scan_in = pattern[s];
      @(negedge clk);
    end
    // The chain now holds the pattern; the next edge loads dout from it.
    scan_en = 0;
    @(negedge clk);
    for (int i = 0; i < LANES; i++) begin
      word_t e;
      if (i % 2 == 0) e = f_d(pattern[(3*i+2)*DATA_W +: DATA_W]);
      else e = f_d(f_c(pattern[(3*i+1)*DATA_W +: DATA_W] ^ pattern[(3*i+2)*DATA_W +: DATA_W]));
      checks++;
      if (dout[i] !== e) begin
        failures++;
        $display("FAIL scan control lane %0d: dout=%h want %h", i, dout[i], e);
      end else m_control++;
    end
    test_mode = 0;

    // Fuse blown: scan requests are ignored, the chain shows nothing.
    fuse = 1; scan_en = 1; test_mode = 1;
    fork
      run_and_check(30, "fuse blown", dv);
      repeat (34) begin
        scan_in = 1'($urandom);
        @(negedge clk);
        checks++;
        if (scan_out !== 1'b0) failures++;
      end
    join
    checks++; if (dv != 0) failures++; else m_fuse++;
    fuse = 0; scan_en = 0; test_mode = 0;

    // Every mechanism must have happened.
    $display("mechanisms: correct=%0d decoy_equivalent=%0d cycle_delay=%0d diverged=%0d latch_reset=%0d logic_decoy=%0d scan_observe=%0d scan_control=%0d fuse_block=%0d",
             m_correct, m_equiv, m_cdelay, m_diverge, m_reset, m_ldecoy, m_observe, m_control, m_fuse);
    checks += 9;
    if (m_correct == 0) failures++;
    if (m_equiv == 0)   failures++;
    if (m_cdelay == 0)  failures++;
    if (m_diverge == 0) failures++;
    if (m_reset == 0)   failures++;
    if (m_ldecoy == 0)  failures++;
    if (m_observe == 0) failures++;
    if (m_control == 0) failures++;
    if (m_fuse == 0)    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
