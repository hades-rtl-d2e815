// hades_tb_pkg: reference arithmetic for the verification-unit testbenches.
//
// Everything here is computed in double precision (real), independently of
// the RTL's own fp32 units: fp16/fp32 bit patterns are decoded to real numbers,
// reals are encoded to fp16 with round-to-nearest, and the xorshift32 random
// sequence of the RNG queue is regenerated so that a testbench knows which
// random number the design draws for each decision.
package hades_tb_pkg;

  // Decode an IEEE binary16 bit pattern.
  function automatic real fp16_to_real(input logic [15:0] h);
    int  e;
    real m;
    e = int'(h[14:10]);
    if (e == 0) m = real'(h[9:0]) * (2.0 ** -24);
    else        m = (1.0 + real'(h[9:0]) / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  // Decode an IEEE binary32 bit pattern (finite values).
  function automatic real fp32_to_real(input logic [31:0] f);
    int  e;
    real m;
    e = int'(f[30:23]);
    if (e == 0) return 0.0;
    m = (1.0 + real'(f[22:0]) / 8388608.0) * (2.0 ** (e - 127));
    return f[31] ? -m : m;
  endfunction

  // Encode a real as binary16, round to nearest (no overflow handling needed
  // for the probabilities and logits used here, |x| < 65504).
  function automatic logic [15:0] real_to_fp16(input real x);
    logic s;
    real  a, m;
    int   e, mi;
    s = (x < 0.0);
    a = s ? -x : x;
    if (a < 2.0 ** -25) return {s, 15'd0};
    e = 0;
    m = a;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    if (e < -14) begin
      mi = $rtoi(a / (2.0 ** -24) + 0.5);
      if (mi >= 1024) return {s, 5'd1, 10'd0};
      return {s, 5'd0, 10'(mi)};
    end
    mi = $rtoi((m - 1.0) * 1024.0 + 0.5);
    if (mi >= 1024) begin mi = 0; e++; end
    return {s, 5'(e + 15), 10'(mi)};
  endfunction

  // Encode a real as binary32 (normal range only, truncating).
  function automatic logic [31:0] real_to_fp32(input real x);
    logic s;
    real  a, m;
    int   e;
    s = (x < 0.0);
    a = s ? -x : x;
    if (a < 2.0 ** -126) return {s, 31'd0};
    e = 0;
    m = a;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    return {s, 8'(e + 127), 23'($rtoi((m - 1.0) * 8388608.0))};
  endfunction

  // xorshift32 step and the fraction it yields (upper 24 bits / 2^24).
  function automatic logic [31:0] xs32_next(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  function automatic real xs32_frac(input logic [31:0] x);
    return real'(x[31:8]) / 16777216.0;
  endfunction

endpackage
