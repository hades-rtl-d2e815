// tb_hades_fp_alu: checks one FP ALU lane against double-precision arithmetic.
// Random fp16 operands (probabilities, signed values, subnormals, zeros) and
// random fractions r are applied for every operation; PASS_A must return q
// exactly widened, RESID must return max(0, q-p) to within fp32 truncation,
// ACCEPT must return r*p < q (or p == 0) wherever the comparison is not
// within rounding distance, and a disabled lane must return zeros.
module tb_hades_fp_alu;
  import hades_pkg::*;
  import hades_tb_pkg::*;

  alu_op_e op;
  logic    en;
  fp16_t   a, b;
  fp32_t   s, val;
  logic    flag;
  int      checks = 0, failures = 0;

  hades_fp_alu dut (.op(op), .en(en), .a(a), .b(b), .s(s), .val(val), .flag(flag));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic fp16_t rnd16();
    unique case ($urandom_range(4, 0))
      0: return 16'h0000;
      1: return fp16_t'($urandom_range(1023, 1));                 // subnormal
      2: return real_to_fp16(real'($urandom_range(100000, 0)) / 100000.0);
      3: return real_to_fp16(real'($urandom_range(2000, 0)) / 100.0 - 10.0);
      default: return real_to_fp16(real'($urandom_range(1000, 1)) * 1e-5);
    endcase
  endfunction

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real q, p, r, d, got;
    for (int it = 0; it < 3000; it++) begin
      a = rnd16(); b = rnd16();
      s = frac24_to_fp32_ref($urandom_range(24'hFFFFFF, 0));
      q = fp16_to_real(a); p = fp16_to_real(b); r = fp32_to_real(s);
      en = 1'b1;
      op = OP_PASS_A; #1;
      check(fp32_to_real(val) == q, $sformatf("pass %h -> %h", a, val));
      op = OP_RESID; #1;
      d = (q - p > 0.0) ? q - p : 0.0;
      got = fp32_to_real(val);
      // truncation error is bounded by a few ulps of the larger operand
      check(got >= 0.0 && (got - d <= 2.5e-7 * (q*q > p*p ? (q > 0 ? q : -q) : (p > 0 ? p : -p)) + 1e-38)
                       && (d - got <= 2.5e-7 * (q*q > p*p ? (q > 0 ? q : -q) : (p > 0 ? p : -p)) + 1e-38),
            $sformatf("resid q=%g p=%g got %g", q, p, got));
      op = OP_ACCEPT; #1;
      if (p == 0.0) check(flag == 1'b1, "accept p==0");
      else if (r * p < q * (1.0 - 1e-6) || r * p > q * (1.0 + 1e-6) + 1e-30)
        check(flag == (r * p < q), $sformatf("accept r=%g p=%g q=%g flag %0d", r, p, q, flag));
      check(val == FP32_ZERO, "accept leaves val zero");
      en = 1'b0; #1;
      check(val == FP32_ZERO && flag == 1'b0, "disabled lane");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // fraction x/2^24 as fp32, computed without the design's function
  function automatic fp32_t frac24_to_fp32_ref(input logic [23:0] x);
    return real_to_fp32(real'(x) / 16777216.0);
  endfunction

endmodule
