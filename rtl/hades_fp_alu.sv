// hades_fp_alu: one floating-point lane of the 8 x 64 FPU array.
//
// The lane reads one target-model entry (a = q[i]) and one draft-model entry
// (b = p[i]) from the same column of a buffer line, widens both from fp16 to
// fp32, and performs the operation the controller broadcasts to all lanes:
//   OP_PASS_A : val = q[i]                      (sampling from q, bonus token)
//   OP_RESID  : val = max(0, q[i] - p[i])        (residual distribution)
//   OP_ACCEPT : flag = (r * p[i] < q[i]) or p[i] == 0
// The accept test is Algorithm 1's "r < min(1, q/p)" rewritten without a
// divider: for p > 0, r < q/p is r*p < q, and r < 1 always holds; for p == 0
// the ratio is infinite (or undefined) and the token is accepted.
// A lane whose column lies beyond the vocabulary (en = 0) outputs val = 0 and
// flag = 0, so padding entries never receive probability mass.
//
// The lane is purely combinational; the array registers its outputs. Only the
// name "FP ALU" and the lane count come from the source architecture; the
// operation set is this design's reading of the verification algorithm.
module hades_fp_alu
  import hades_pkg::*;
(
  input  alu_op_e op,
  input  logic    en,     // lane holds a valid vocabulary entry
  input  fp16_t   a,      // target entry q[i]
  input  fp16_t   b,      // draft entry p[i]
  input  fp32_t   s,      // broadcast scalar (random number r)
  output fp32_t   val,
  output logic    flag
);

  fp32_t qa, pb, diff, rp;

  always_comb begin
    qa   = fp16_to_fp32(a);
    pb   = fp16_to_fp32(b);
    diff = fp32_add(qa, {~pb[31], pb[30:0]});
    rp   = fp32_mul(s, pb);
    val  = FP32_ZERO;
    flag = 1'b0;
    if (en) begin
      unique case (op)
        OP_PASS_A: val  = qa;
        OP_RESID:  val  = fp32_relu(diff);
        OP_ACCEPT: flag = fp32_lt(rp, qa) || fp32_is_zero(pb);
        default:   val  = FP32_ZERO;
      endcase
    end
  end

endmodule
