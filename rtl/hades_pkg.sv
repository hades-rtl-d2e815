// hades_pkg: types, sizes and floating-point helper functions shared by the
// speculative-decoding verification unit.
//
// Storage format. The local buffer stores each distribution entry as an IEEE
// binary16 (fp16) value: a ~50k-entry vocabulary at 2 bytes per entry gives the
// ~100 KB per position that the design is sized around. Inside the FP ALUs every
// operand is widened to binary32 (fp32) exactly, including fp16 subnormals, so
// small probabilities (1/50k lies below the fp16 normal range) are not lost.
//
// Arithmetic. The fp32 add and multiply below are this design's own simple
// units: subnormal results are flushed to zero, results are truncated (rounded
// toward zero) rather than rounded to nearest, and infinities/NaNs are not
// expected on the inputs (probabilities are finite and non-negative). Exponent
// overflow saturates to the largest finite value.
package hades_pkg;

  // Array geometry (8 x 64 FP ALUs) and line width of the local buffer.
  localparam int unsigned ROWS  = 8;
  localparam int unsigned COLS  = 64;
  localparam int unsigned LANES = ROWS * COLS;   // entries per buffer line

  localparam int unsigned TOK_W   = 16;          // token id width (vocab < 65536)
  localparam int unsigned VOCAB_W = 17;          // vocab size register width

  typedef logic [15:0] fp16_t;
  typedef logic [31:0] fp32_t;
  typedef logic [TOK_W-1:0] token_t;
  typedef logic [LANES-1:0][15:0] line_t;   // one buffer line of fp16 entries

  localparam fp32_t FP32_ZERO = 32'h0000_0000;
  localparam fp32_t FP32_ONE  = 32'h3F80_0000;

  // Operation selected for every lane of the FPU array.
  typedef enum logic [1:0] {
    OP_PASS_A = 2'd0,   // val = a                (sample from target q)
    OP_RESID  = 2'd1,   // val = max(0, a - b)    (residual q - p, Alg. 1 line 16)
    OP_ACCEPT = 2'd2    // flag = (s * b < a) or b == 0  (r < min(1, q/p))
  } alu_op_e;

  // Verification mode.
  typedef enum logic {
    MODE_SAMPLE = 1'b0, // stochastic accept/reject of Algorithm 1
    MODE_GREEDY = 1'b1  // greedy decoding: accept iff token is argmax of q
  } verify_mode_e;

  // Buffer bank select for host writes.
  typedef enum logic [1:0] {
    BANK_TGT = 2'd0,    // target_logits
    BANK_DRF = 2'd1,    // draft_logits
    BANK_TOK = 2'd2     // draft_tokens
  } bank_e;

  // ---------------------------------------------------------------------
  // fp16 -> fp32, exact (subnormal fp16 inputs are normalised).
  function automatic fp32_t fp16_to_fp32(input fp16_t h);
    logic        s;
    logic [4:0]  e;
    logic [9:0]  f;
    logic [9:0]  fn;
    int          sh;
    fp32_t       r;
    s = h[15];
    e = h[14:10];
    f = h[9:0];
    if (e == 5'd0) begin
      if (f == 10'd0) begin
        r = {s, 31'd0};
      end else begin
        // value = f * 2^-24 ; normalise so the leading one is implicit
        sh = 0;
        for (int i = 9; i >= 0; i--) begin
          if (f[i] && sh == 0) sh = 10 - i;   // shift that moves bit i to bit 10
        end
        fn = 10'(f << sh);
        r  = {s, 8'(127 - 14 - sh), fn, 13'd0};
      end
    end else if (e == 5'h1F) begin
      r = {s, 8'hFF, f, 13'd0};
    end else begin
      r = {s, 8'(32'(e) + 112), f, 13'd0};
    end
    return r;
  endfunction

  // Unsigned 24-bit fraction x / 2^24 in [0,1) -> fp32 (exact).
  function automatic fp32_t frac24_to_fp32(input logic [23:0] x);
    int          lead;
    logic [23:0] xn;
    lead = -1;
    for (int i = 0; i < 24; i++) begin
      if (x[i]) lead = i;
    end
    if (lead < 0) return FP32_ZERO;
    xn = 24'(x << (23 - lead));
    // value = 1.xxx * 2^(lead-24)
    return {1'b0, 8'(127 + lead - 24), xn[22:0]};
  endfunction

  function automatic logic fp32_is_zero(input fp32_t a);
    return a[30:23] == 8'd0;
  endfunction

  // a + b, truncating, flush-to-zero.
  function automatic fp32_t fp32_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y, t;
    logic [7:0]  ex, ey;
    logic [27:0] mx, my, m;
    int          d, lz;
    int          e;
    if (fp32_is_zero(a)) return fp32_is_zero(b) ? FP32_ZERO : b;
    if (fp32_is_zero(b)) return a;
    x = a; y = b;
    if (y[30:0] > x[30:0]) begin t = x; x = y; y = t; end
    ex = x[30:23]; ey = y[30:23];
    mx = {1'b0, 1'b1, x[22:0], 3'b000};
    my = {1'b0, 1'b1, y[22:0], 3'b000};
    d  = int'(ex) - int'(ey);
    my = (d > 27) ? 28'd0 : (my >> d);
    e  = int'(ex);
    if (x[31] == y[31]) begin
      m = mx + my;
      if (m[27]) begin m = m >> 1; e = e + 1; end
    end else begin
      m = mx - my;
      if (m == 28'd0) return FP32_ZERO;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (m[i] && lz == 0) lz = 26 - i + 1;
      end
      lz = lz - 1;                 // number of places to shift left
      m  = m << lz;
      e  = e - lz;
    end
    if (e <= 0)   return FP32_ZERO;
    if (e >= 255) return {x[31], 8'hFE, 23'h7F_FFFF};
    return {x[31], 8'(e), m[25:3]};
  endfunction

  // a * b, truncating, flush-to-zero.
  function automatic fp32_t fp32_mul(input fp32_t a, input fp32_t b);
    logic [47:0] m;
    logic [22:0] f;
    int          e;
    logic        s;
    s = a[31] ^ b[31];
    if (fp32_is_zero(a) || fp32_is_zero(b)) return FP32_ZERO;
    m = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (m[47]) begin f = m[46:24]; e = e + 1; end
    else       begin f = m[45:23]; end
    if (e <= 0)   return FP32_ZERO;
    if (e >= 255) return {s, 8'hFE, 23'h7F_FFFF};
    return {s, 8'(e), f};
  endfunction

  // Total order key: a < b  <=>  key(a) < key(b) (zeros of either sign equal).
  function automatic logic [31:0] fp32_key(input fp32_t a);
    if (fp32_is_zero(a)) return 32'h8000_0000;
    return a[31] ? ~a : (a | 32'h8000_0000);
  endfunction

  function automatic logic fp32_lt(input fp32_t a, input fp32_t b);
    return fp32_key(a) < fp32_key(b);
  endfunction

  function automatic fp32_t fp32_relu(input fp32_t a);
    return (a[31] || fp32_is_zero(a)) ? FP32_ZERO : a;
  endfunction

endpackage
