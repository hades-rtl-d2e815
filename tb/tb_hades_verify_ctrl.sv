// tb_hades_verify_ctrl: checks the verification controller with a small
// buffer (32 + 32 lines, up to 8 draft tokens), the real FPU array, and a
// random-number source driven by the testbench. Because the testbench
// chooses every random number, each accept/reject decision is forced: a draft
// token with q/p = 0.5 is accepted for r = 0.25 and rejected for r = 0.75.
// The source also withholds numbers at random, so the controller must stall
// until one is offered. Checked: number of accepted tokens, the sampled token
// (inside the inverse-CDF window of u), greedy argmax decisions, the capacity
// error, stall counts and the latency formula including stall cycles.
module tb_hades_verify_ctrl;
  import hades_pkg::*;
  import hades_tb_pkg::*;

  localparam int TL = 32, DL = 32, TD = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // command / status
  logic         start = 1'b0;
  verify_mode_e mode = MODE_SAMPLE;
  logic [4:0]   gamma = '0;
  logic [16:0]  vocab_size = '0;
  logic         busy, done, cap_error, all_accepted;
  logic [4:0]   n_accepted;
  token_t       next_token;
  logic         ev_accept, ev_reject, ev_bonus, ev_rng_stall, ev_resid_fallback;
  // buffer
  logic         wr_en = 1'b0;
  bank_e        wr_bank = BANK_TGT;
  logic [15:0]  wr_addr = '0;
  line_t        wr_line = '0;
  token_t       wr_tok = '0;
  logic         tgt_rd_en, drf_rd_en, tok_rd_en;
  logic [15:0]  tgt_rd_addr, drf_rd_addr, tok_rd_addr;
  line_t        tgt_rd_data, drf_rd_data;
  token_t       tok_rd_data;
  // array
  logic         a_in_valid, a_out1_valid, a_out2_valid, a_line_any;
  alu_op_e      a_op;
  logic [9:0]   a_lane_cnt;
  fp32_t        a_s, a_line_sum, a_line_max;
  logic [15:0]  a_tag, a_out1_tag, a_out2_tag;
  fp32_t        a_val [LANES];
  logic [LANES-1:0] a_flag;
  fp32_t        a_row_sum [ROWS];
  logic [8:0]   a_line_argmax;
  // random source
  logic         rng_pop, rng_valid;
  fp32_t        rng_data;
  real          rq [$];
  bit           hold_en = 1'b0;   // withhold numbers at random

  // the offered number is updated on the falling edge, after any pop
  always @(negedge clk) begin
    rng_valid <= (rq.size() > 0) && !(hold_en && ($urandom_range(2, 0) != 0));
    rng_data  <= (rq.size() > 0) ? real_to_fp32(rq[0]) : FP32_ZERO;
  end

  hades_local_buffer #(.TGT_LINES(TL), .DRF_LINES(DL), .TOK_DEPTH(TD)) u_buf (
    .clk(clk), .wr_en(wr_en), .wr_bank(wr_bank), .wr_addr(wr_addr), .wr_line(wr_line), .wr_tok(wr_tok),
    .tgt_rd_en(tgt_rd_en), .tgt_rd_addr(tgt_rd_addr), .tgt_rd_data(tgt_rd_data),
    .drf_rd_en(drf_rd_en), .drf_rd_addr(drf_rd_addr), .drf_rd_data(drf_rd_data),
    .tok_rd_en(tok_rd_en), .tok_rd_addr(tok_rd_addr), .tok_rd_data(tok_rd_data));

  hades_fpu_array u_arr (
    .clk(clk), .rst_n(rst_n), .in_valid(a_in_valid), .op(a_op), .lane_cnt(a_lane_cnt),
    .a_line(tgt_rd_data), .b_line(drf_rd_data), .s(a_s), .in_tag(a_tag),
    .out1_valid(a_out1_valid), .out1_tag(a_out1_tag), .val(a_val), .flag(a_flag),
    .out2_valid(a_out2_valid), .out2_tag(a_out2_tag), .row_sum(a_row_sum),
    .line_sum(a_line_sum), .line_max(a_line_max), .line_argmax(a_line_argmax), .line_any(a_line_any));

  hades_verify_ctrl #(.TGT_LINES(TL), .DRF_LINES(DL), .TOK_DEPTH(TD)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .mode(mode), .gamma(gamma), .vocab_size(vocab_size),
    .busy(busy), .done(done), .cap_error(cap_error), .n_accepted(n_accepted),
    .next_token(next_token), .all_accepted(all_accepted),
    .ev_accept(ev_accept), .ev_reject(ev_reject), .ev_bonus(ev_bonus),
    .ev_rng_stall(ev_rng_stall), .ev_resid_fallback(ev_resid_fallback),
    .tgt_rd_en(tgt_rd_en), .tgt_rd_addr(tgt_rd_addr), .drf_rd_en(drf_rd_en), .drf_rd_addr(drf_rd_addr),
    .tok_rd_en(tok_rd_en), .tok_rd_addr(tok_rd_addr), .tok_rd_data(tok_rd_data),
    .arr_in_valid(a_in_valid), .arr_op(a_op), .arr_lane_cnt(a_lane_cnt), .arr_s(a_s), .arr_tag(a_tag),
    .arr_out1_valid(a_out1_valid), .arr_val(a_val), .arr_flag(a_flag),
    .arr_out2_valid(a_out2_valid), .arr_out2_tag(a_out2_tag), .arr_row_sum(a_row_sum),
    .arr_line_sum(a_line_sum), .arr_line_max(a_line_max), .arr_line_argmax(a_line_argmax),
    .arr_line_any(a_line_any), .rng_pop(rng_pop), .rng_valid(rng_valid), .rng_data(rng_data));

  int checks = 0, failures = 0, stalls = 0, n_acc_ev = 0, n_rej_ev = 0, n_bonus_ev = 0;
  always @(posedge clk) begin
    if (rng_pop) begin
      if (rq.size() == 0) begin failures++; $display("FAIL: pop of an empty source"); end
      else void'(rq.pop_front());
    end
    if (ev_rng_stall) stalls++;
    if (ev_accept) n_acc_ev++;
    if (ev_reject) n_rej_ev++;
    if (ev_bonus)  n_bonus_ev++;
  end


  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] qm [TL * LANES];
  logic [15:0] pm [DL * LANES];
  token_t      toks [TD];

  function automatic int nl(input int v); return (v + LANES - 1) / LANES; endfunction
  function automatic real qv(input int k, input int v, input int i); return fp16_to_real(qm[k*nl(v)*LANES + i]); endfunction
  function automatic real pv(input int k, input int v, input int i); return fp16_to_real(pm[k*nl(v)*LANES + i]); endfunction

  task automatic gen(input int g, input int v);
    for (int k = 0; k <= g; k++)
      for (int i = 0; i < nl(v) * LANES; i++) begin
        qm[k*nl(v)*LANES + i] = real_to_fp16(real'($urandom_range(1000, 1)) / (1000.0 * v));
        if (k < g) pm[k*nl(v)*LANES + i] = real_to_fp16(real'($urandom_range(1000, 1)) / (1000.0 * v));
      end
  endtask

  task automatic load(input int g, input int v);
    for (int l = 0; l < (g + 1) * nl(v); l++) begin
      @(negedge clk); wr_en = 1; wr_bank = BANK_TGT; wr_addr = 16'(l);
      for (int i = 0; i < LANES; i++) wr_line[i] = qm[l*LANES + i];
    end
    for (int l = 0; l < g * nl(v); l++) begin
      @(negedge clk); wr_en = 1; wr_bank = BANK_DRF; wr_addr = 16'(l);
      for (int i = 0; i < LANES; i++) wr_line[i] = pm[l*LANES + i];
    end
    for (int k = 0; k < g; k++) begin
      @(negedge clk); wr_en = 1; wr_bank = BANK_TOK; wr_addr = 16'(k); wr_tok = toks[k];
    end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic run(input verify_mode_e m, input int g, input int v, output int cyc);
    @(negedge clk);
    mode = m; gamma = 5'(g); vocab_size = 17'(v); start = 1;
    @(posedge clk); #1 start = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); #1 cyc++; end
  endtask

  task automatic check_draw(input real w[], input real u, input int t, input string what);
    real tot, cb, thr;
    tot = 0; foreach (w[i]) tot += w[i];
    thr = u * tot; cb = 0;
    for (int i = 0; i < t && i < w.size(); i++) cb += w[i];
    check(t < w.size() && w[t] > 0 && cb <= thr + 1e-3 * tot && cb + w[t] >= thr - 1e-3 * tot,
          $sformatf("%s: token %0d outside window", what, t));
  endtask

  function automatic int sample_cycles(input int v, input int tok);
    int L, j;
    L = nl(v); j = tok / LANES;
    return (L + 3) + 1 + (((L - 1) < (j + 3) ? (L - 1) : (j + 3)) + 4) + 1 + 3
           + ((tok % LANES) / COLS + 1) + (tok % COLS + 1);
  endfunction

  initial begin
    int g, v, cyc, st0, nacc;
    real w[];
    real r[$];
    repeat (3) @(posedge clk);
    rst_n = 1;

    // A: sampling, decisions forced through q/p = 0.5 at the draft tokens
    for (int trial = 0; trial < 6; trial++) begin
      g = 3 + (trial % 3); v = 700 + 111 * trial;
      gen(g, v);
      for (int k = 0; k < g; k++) begin
        toks[k] = token_t'($urandom_range(v - 1, 0));
        pm[k*nl(v)*LANES + toks[k]] = real_to_fp16(0.004);
        qm[k*nl(v)*LANES + toks[k]] = real_to_fp16(0.002);
      end
      load(g, v);
      nacc = (trial == 5) ? g : trial % g;     // where the first rejection falls
      r.delete();
      for (int k = 0; k < g && k <= nacc; k++) r.push_back((k < nacc) ? 0.25 : 0.75);
      foreach (r[i]) rq.push_back(r[i]);
      rq.push_back(0.1 + 0.15 * trial);        // u for the sample
      hold_en = (trial % 2 == 1);
      st0 = stalls;
      run(MODE_SAMPLE, g, v, cyc);
      hold_en = 0;
      // the controller consumes one number per tested token and one for the sample
      check(rq.size() == 0, "A: random numbers consumed");
      rq.delete();
      check(int'(n_accepted) == nacc, $sformatf("A%0d: accepted %0d expected %0d", trial, n_accepted, nacc));
      check(all_accepted == (nacc == g), "A: all_accepted");
      w = new[v];
      for (int i = 0; i < v; i++) begin
        if (nacc == g) w[i] = qv(g, v, i);
        else begin w[i] = qv(nacc, v, i) - pv(nacc, v, i); if (w[i] < 0) w[i] = 0; end
      end
      check_draw(w, 0.1 + 0.15 * trial, int'(next_token), $sformatf("A%0d", trial));
      check(cyc == 2 + 4 * ((nacc < g) ? nacc + 1 : g) + sample_cycles(v, int'(next_token)) + (stalls - st0),
            $sformatf("A%0d: latency %0d (stalls %0d)", trial, cyc, stalls - st0));
    end
    check(stalls > 0, "stall on missing random number seen");

    // B: greedy, reject at position 1
    g = 3; v = 1500;
    gen(g, v);
    for (int k = 0; k < g; k++) begin
      int am; real b;
      am = 0; b = qv(k, v, 0);
      for (int i = 1; i < v; i++) if (qv(k, v, i) > b) begin b = qv(k, v, i); am = i; end
      toks[k] = token_t'((k == 1) ? (am + 3) % v : am);
    end
    load(g, v);
    run(MODE_GREEDY, g, v, cyc);
    begin
      int am; real b;
      am = 0; b = qv(1, v, 0);
      for (int i = 1; i < v; i++) if (qv(1, v, i) > b) begin b = qv(1, v, i); am = i; end
      check(n_accepted == 5'd1 && int'(next_token) == am, "B: greedy correction token");
      check(cyc == 2 + 2 * (nl(v) + 5), $sformatf("B: greedy latency %0d", cyc));
    end

    // C: capacity error: (4+1) * 8 lines > 32
    run(MODE_SAMPLE, 4, 8 * LANES, cyc);
    check(cap_error && n_accepted == 0, "C: capacity error");
    run(MODE_GREEDY, 9, 100, cyc);
    check(cap_error, "C: gamma beyond token depth");
    run(MODE_SAMPLE, 1, 0, cyc);
    check(cap_error, "C: empty vocabulary");

    check(n_acc_ev > 0 && n_rej_ev > 0 && n_bonus_ev > 0, "events seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
