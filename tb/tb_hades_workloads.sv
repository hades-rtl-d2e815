// tb_hades_workloads: the model pairs of the evaluation, at full vocabulary
// size, on the default-size unit. GPT-2 (50257-entry vocabulary) and OPT
// (50272 entries) distributions are generated at random, since only their
// sizes matter to the hardware. For each pair the windows that fit the 480 KB
// buffer are verified (gamma = 0 and gamma = 1, sampling and greedy) and
// checked against the double-precision reference with exact latency; the
// larger gammas of the evaluation (2, 4, 8, 16) must be refused with the
// capacity error, since (gamma+1) * 99 target lines exceed the 240 available.
module tb_hades_workloads;
  import hades_pkg::*;
  import hades_tb_pkg::*;

  localparam int TGT_LINES = 240;
  localparam int DRF_LINES = 240;
  localparam int MAXE      = TGT_LINES * LANES;

  logic               clk = 1'b0;
  logic               rst_n = 1'b0;
  logic               wr_en = 1'b0;
  bank_e              wr_bank = BANK_TGT;
  logic [15:0]        wr_addr = '0;
  line_t              wr_line = '0;
  token_t             wr_tok = '0;
  logic               seed_load = 1'b0;
  logic [31:0]        seed = '0;
  logic               start = 1'b0;
  verify_mode_e       mode = MODE_SAMPLE;
  logic [4:0]         gamma = '0;
  logic [VOCAB_W-1:0] vocab_size = '0;
  logic               busy, done, cap_error, all_accepted;
  logic [4:0]         n_accepted;
  token_t             next_token;
  logic               ev_accept, ev_reject, ev_bonus, ev_rng_stall, ev_resid_fallback;

  always #5 clk = ~clk;

  hades_top dut (
    .clk(clk), .rst_n(rst_n),
    .wr_en(wr_en), .wr_bank(wr_bank), .wr_addr(wr_addr), .wr_line(wr_line), .wr_tok(wr_tok),
    .seed_load(seed_load), .seed(seed),
    .start(start), .mode(mode), .gamma(gamma), .vocab_size(vocab_size),
    .busy(busy), .done(done), .cap_error(cap_error), .n_accepted(n_accepted),
    .next_token(next_token), .all_accepted(all_accepted),
    .ev_accept(ev_accept), .ev_reject(ev_reject), .ev_bonus(ev_bonus),
    .ev_rng_stall(ev_rng_stall), .ev_resid_fallback(ev_resid_fallback)
  );

  // ---------------------------------------------------------- bookkeeping
  int checks = 0, failures = 0;
  int cnt_accept = 0, cnt_reject = 0, cnt_bonus = 0, cnt_fallback = 0, cnt_stall = 0;
  int cnt_greedy = 0, cnt_sample = 0, cnt_caperr = 0, cnt_partial_line = 0;
  int cnt_gamma16 = 0, cnt_gamma0 = 0, cnt_fullvocab = 0;

  always @(posedge clk) begin
    if (ev_accept)         cnt_accept++;
    if (ev_reject)         cnt_reject++;
    if (ev_bonus)          cnt_bonus++;
    if (ev_resid_fallback) cnt_fallback++;
    if (ev_rng_stall)      cnt_stall++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Watchdog.
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------- mirrors
  logic [15:0] qm [MAXE];
  logic [15:0] pm [DRF_LINES * LANES];
  token_t      toks [16];
  logic [31:0] rs;            // model of the generator state
  bit          rs_known = 1'b0;

  function automatic real rng_take();
    rs = xs32_next(rs);
    return xs32_frac(rs);
  endfunction

  function automatic int nlines(input int v);
    return (v + LANES - 1) / LANES;
  endfunction

  task automatic reseed(input logic [31:0] s);
    @(negedge clk);
    seed = s; seed_load = 1'b1;
    @(negedge clk);
    seed_load = 1'b0;
    rs = s;
    rs_known = 1'b1;
  endtask

  // Random distribution for position pos of a bank (0 target, 1 draft).
  // Entries past V in the last line get junk, which the design must ignore.
  task automatic gen_dist(input int bank, input int pos, input int v, input int spiky);
    real w[];
    real sum;
    int  base;
    base = pos * nlines(v) * LANES;
    w = new[v];
    sum = 0.0;
    for (int i = 0; i < v; i++) begin
      w[i] = real'($urandom_range(1000, 1));
      if (spiky != 0 && $urandom_range(9, 0) == 0) w[i] = w[i] * 50.0;
      sum += w[i];
    end
    for (int i = 0; i < nlines(v) * LANES; i++) begin
      logic [15:0] h;
      h = (i < v) ? real_to_fp16(w[i] / sum) : real_to_fp16(0.25);
      if (bank == 0) qm[base + i] = h; else pm[base + i] = h;
    end
  endtask

  // q of position pos := p of position pos scaled by f
  task automatic copy_p_to_q(input int pos, input int v, input real f);
    int base;
    base = pos * nlines(v) * LANES;
    for (int i = 0; i < nlines(v) * LANES; i++)
      qm[base + i] = real_to_fp16(f * fp16_to_real(pm[base + i]));
  endtask

  task automatic push_lines(input int bank, input int first, input int n);
    for (int l = first; l < first + n; l++) begin
      line_t ln;
      for (int i = 0; i < LANES; i++) ln[i] = (bank == 0) ? qm[l*LANES + i] : pm[l*LANES + i];
      @(negedge clk);
      wr_en = 1'b1; wr_bank = (bank == 0) ? BANK_TGT : BANK_DRF;
      wr_addr = 16'(l); wr_line = ln;
    end
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic push_tokens(input int g);
    for (int k = 0; k < g; k++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_bank = BANK_TOK; wr_addr = 16'(k); wr_tok = toks[k];
    end
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  // Loads a whole window: gamma+1 target and gamma draft distributions.
  task automatic load_window(input int g, input int v, input bit greedy);
    push_lines(0, 0, (g + 1) * nlines(v));
    if (!greedy && g > 0) push_lines(1, 0, g * nlines(v));
    push_tokens(g);
  endtask

  // Runs one verification; returns the cycle count from start to done.
  task automatic run(input verify_mode_e m, input int g, input int v, output int cycles);
    @(negedge clk);
    mode = m; gamma = 5'(g); vocab_size = VOCAB_W'(v); start = 1'b1;
    @(posedge clk);
    #1 start = 1'b0;
    cycles = 0;
    while (!done) begin
      @(posedge clk);
      #1 cycles++;
      if (cycles > 100000) begin
        check(0, "run did not finish");
        return;
      end
    end
  endtask

  // ---------------------------------------------------------- reference
  function automatic real qv(input int pos, input int v, input int i);
    return fp16_to_real(qm[pos * nlines(v) * LANES + i]);
  endfunction
  function automatic real pv(input int pos, input int v, input int i);
    return fp16_to_real(pm[pos * nlines(v) * LANES + i]);
  endfunction

  // Checks that token t is a valid inverse-CDF draw for u from weights w.
  task automatic check_draw(input real w[], input real u, input int t, input string what);
    real tot, cb, thr, tol;
    tot = 0.0;
    foreach (w[i]) tot += w[i];
    thr = u * tot;
    tol = 1e-3 * tot;
    cb = 0.0;
    for (int i = 0; i < t && i < w.size(); i++) cb += w[i];
    check(t < w.size() && w[t] > 0.0 && cb <= thr + tol && cb + w[t] >= thr - tol,
          $sformatf("%s: token %0d not in window of u=%f", what, t, u));
  endtask

  // Reference for one sampling-mode run; checks results and latency.
  task automatic ref_sample(input int g, input int v, input int cycles, input string what);
    int  k, exp_cyc, L, t;
    bit  rej, marginal;
    real w[];
    real u;
    L = nlines(v);
    k = 0; rej = 0; marginal = 0;
    exp_cyc = 1 + 1;                       // CHECK + FINISH
    while (k < g) begin
      real r, q, p;
      t = int'(toks[k]);
      q = qv(k, v, t); p = pv(k, v, t);
      r = rng_take();
      exp_cyc += 4;
      if (p != 0.0 && (r * p - q) < 1e-5 * q && (q - r * p) < 1e-5 * q) marginal = 1;
      if (p == 0.0 || r * p < q) k++;
      else begin rej = 1; break; end
    end
    if (marginal) begin
      $display("note: %s has a marginal accept test, decisions not checked", what);
      rs_known = 1'b0;  // sequence position is unknown from here on
      return;
    end
    check(int'(n_accepted) == k, $sformatf("%s: n_accepted %0d expected %0d", what, n_accepted, k));
    check(all_accepted == !rej, $sformatf("%s: all_accepted", what));
    check(!cap_error, $sformatf("%s: unexpected capacity error", what));
    w = new[v];
    if (rej) begin
      real tot;
      tot = 0.0;
      for (int i = 0; i < v; i++) begin
        w[i] = qv(k, v, i) - pv(k, v, i);
        if (w[i] < 0.0) w[i] = 0.0;
        tot += w[i];
      end
      if (tot == 0.0) begin
        for (int i = 0; i < v; i++) w[i] = qv(k, v, i);
        exp_cyc += L + 3;                 // extra SUM pass over q
      end
    end else begin
      for (int i = 0; i < v; i++) w[i] = qv(g, v, i);
    end
    u = rng_take();
    check_draw(w, u, int'(next_token), what);
    begin
      int j, rw, c;
      j = int'(next_token) / LANES;
      rw = (int'(next_token) % LANES) / COLS;
      c = int'(next_token) % COLS;
      exp_cyc += (L + 3) + 1 + (((L - 1) < (j + 3) ? (L - 1) : (j + 3)) + 4) + 1 + 3 + (rw + 1) + (c + 1);
    end
    check(cycles == exp_cyc, $sformatf("%s: latency %0d cycles, expected %0d", what, cycles, exp_cyc));
    cnt_sample++;
  endtask

  // Reference for one greedy run.
  task automatic ref_greedy(input int g, input int v, input int cycles, input string what);
    int k, am, exp_cyc, L;
    L = nlines(v);
    k = 0;
    exp_cyc = 2;
    while (1) begin
      real best;
      am = 0; best = qv(k, v, 0);
      for (int i = 1; i < v; i++) if (qv(k, v, i) > best) begin best = qv(k, v, i); am = i; end
      if (k < g) begin
        exp_cyc += L + 5;
        if (int'(toks[k]) == am) begin k++; continue; end
      end else begin
        exp_cyc += L + 3;
      end
      break;
    end
    check(int'(n_accepted) == k, $sformatf("%s: n_accepted %0d expected %0d", what, n_accepted, k));
    check(int'(next_token) == am, $sformatf("%s: token %0d expected %0d", what, next_token, am));
    check(all_accepted == (k == g), $sformatf("%s: all_accepted", what));
    check(cycles == exp_cyc, $sformatf("%s: latency %0d cycles, expected %0d", what, cycles, exp_cyc));
    cnt_greedy++;
  endtask

  function automatic int argmax_q(input int pos, input int v);
    int am; real best;
    am = 0; best = qv(pos, v, 0);
    for (int i = 1; i < v; i++) if (qv(pos, v, i) > best) begin best = qv(pos, v, i); am = i; end
    return am;
  endfunction

  // ---------------------------------------------------------- scenarios
  initial begin
    int cyc, v, vocab [2];
    string fam [2];
    vocab[0] = 50257; fam[0] = "GPT-2";
    vocab[1] = 50272; fam[1] = "OPT";
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    reseed(32'hC0FF_EE11);
    for (int f = 0; f < 2; f++) begin
      v = vocab[f];
      // gamma = 0: baseline, sample from the target distribution
      gen_dist(0, 0, v, 1);
      load_window(0, v, 0);
      if (!rs_known) reseed(32'h5EED_0000 + f);
      run(MODE_SAMPLE, 0, v, cyc);
      ref_sample(0, v, cyc, $sformatf("%s gamma=0", fam[f]));
      // gamma = 1, sampling: once with q = p (accept + bonus), once random
      for (int rep = 0; rep < 3; rep++) begin
        gen_dist(1, 0, v, 1); gen_dist(0, 1, v, 1);
        if (rep == 0) copy_p_to_q(0, v, 1.0); else gen_dist(0, 0, v, 1);
        toks[0] = token_t'($urandom_range(v - 1, 0));
        load_window(1, v, 0);
        if (!rs_known) reseed(32'h5EED_0100 + f * 8 + rep);
        run(MODE_SAMPLE, 1, v, cyc);
        ref_sample(1, v, cyc, $sformatf("%s gamma=1 sample #%0d", fam[f], rep));
      end
      // gamma = 1, greedy (the evaluation's decoding setting)
      gen_dist(0, 0, v, 1); gen_dist(0, 1, v, 1);
      toks[0] = token_t'(argmax_q(0, v));
      load_window(1, v, 1);
      run(MODE_GREEDY, 1, v, cyc);
      ref_greedy(1, v, cyc, $sformatf("%s gamma=1 greedy", fam[f]));
      // the larger gammas of the evaluation do not fit one buffer load
      for (int i = 0; i < 4; i++) begin
        int g;
        g = (i == 0) ? 2 : (i == 1) ? 4 : (i == 2) ? 8 : 16;
        run(MODE_SAMPLE, g, v, cyc);
        check(cap_error && n_accepted == 0, $sformatf("%s gamma=%0d refused", fam[f], g));
        run(MODE_GREEDY, g, v, cyc);
        check(cap_error, $sformatf("%s gamma=%0d greedy refused", fam[f], g));
      end
    end
    check(cnt_accept > 0 && cnt_bonus > 0 && cnt_greedy == 2, "workload mechanisms seen");
    $display("events: accept=%0d reject=%0d bonus=%0d greedy=%0d sample=%0d",
             cnt_accept, cnt_reject, cnt_bonus, cnt_greedy, cnt_sample);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
