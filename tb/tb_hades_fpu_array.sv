// tb_hades_fpu_array: checks the 8 x 64 FPU array and its reductions.
// Random lines of fp16 probabilities (and signed logits for argmax) are fed
// back to back, one per cycle, with random valid-lane counts. For each line
// the testbench checks, against double-precision sums, the stage-1 lane values
// and accept flags one cycle later and the stage-2 row sums, line sum and
// argmax two cycles later, and that the tag travels with the data.
module tb_hades_fpu_array;
  import hades_pkg::*;
  import hades_tb_pkg::*;

  localparam int NL = 24;          // lines in the test

  logic             clk = 1'b0, rst_n = 1'b0;
  logic             in_valid = 1'b0;
  alu_op_e          op = OP_RESID;
  logic [9:0]       lane_cnt = '0;
  line_t            a_line = '0, b_line = '0;
  fp32_t            s = '0;
  logic [15:0]      in_tag = '0;
  logic             out1_valid, out2_valid, line_any;
  logic [15:0]      out1_tag, out2_tag;
  fp32_t            val [LANES];
  logic [LANES-1:0] flag;
  fp32_t            row_sum [ROWS];
  fp32_t            line_sum, line_max;
  logic [8:0]       line_argmax;
  int               checks = 0, failures = 0;

  always #5 clk = ~clk;

  hades_fpu_array dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .op(op), .lane_cnt(lane_cnt),
    .a_line(a_line), .b_line(b_line), .s(s), .in_tag(in_tag),
    .out1_valid(out1_valid), .out1_tag(out1_tag), .val(val), .flag(flag),
    .out2_valid(out2_valid), .out2_tag(out2_tag), .row_sum(row_sum),
    .line_sum(line_sum), .line_max(line_max), .line_argmax(line_argmax), .line_any(line_any)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit close(input real got, input real exp, input real scale);
    real d;
    d = got - exp;
    if (d < 0) d = -d;
    return d <= 1e-5 * scale + 1e-30;
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stimulus and expected results per line
  line_t     A [NL], B [NL];
  alu_op_e   O [NL];
  int        C [NL];
  fp32_t     S [NL];

  function automatic real lane_ref(input int n, input int i);
    real q, p;
    if (i >= C[n]) return 0.0;
    q = fp16_to_real(A[n][i]); p = fp16_to_real(B[n][i]);
    if (O[n] == OP_PASS_A) return q;
    if (O[n] == OP_RESID) return (q > p) ? q - p : 0.0;
    return 0.0;
  endfunction

  initial begin
    for (int n = 0; n < NL; n++) begin
      O[n] = (n % 3 == 0) ? OP_PASS_A : ((n % 3 == 1) ? OP_RESID : OP_ACCEPT);
      C[n] = (n < 3) ? LANES : $urandom_range(LANES, 1);
      S[n] = real_to_fp32(real'($urandom_range(1000, 0)) / 1000.0);
      for (int i = 0; i < LANES; i++) begin
        if (n % 6 == 3) A[n][i] = real_to_fp16(real'($urandom_range(3000, 0)) / 100.0 - 20.0);
        else            A[n][i] = real_to_fp16(real'($urandom_range(1000, 0)) * 1e-5);
        B[n][i] = real_to_fp16(real'($urandom_range(1000, 0)) * 1e-5);
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NL; n++) begin
      @(negedge clk);
      in_valid = 1'b1; op = O[n]; lane_cnt = 10'(C[n]);
      a_line = A[n]; b_line = B[n]; s = S[n]; in_tag = 16'(n + 100);
    end
    @(negedge clk);
    in_valid = 1'b0;
  end

  // stage-1 checker
  int n1 = 0;
  always @(posedge clk) begin
    #1;
    if (out1_valid) begin
      bit ok_v, ok_f;
      ok_v = 1; ok_f = 1;
      check(out1_tag == 16'(n1 + 100), "stage-1 tag");
      for (int i = 0; i < LANES; i++) begin
        real ref_v;
        ref_v = lane_ref(n1, i);
        if (!close(fp32_to_real(val[i]), ref_v, 1.0)) ok_v = 0;
        if (O[n1] == OP_ACCEPT) begin
          real q, p, r;
          q = fp16_to_real(A[n1][i]); p = fp16_to_real(B[n1][i]); r = fp32_to_real(S[n1]);
          if (i >= C[n1]) begin if (flag[i]) ok_f = 0; end
          else if (p == 0.0) begin if (!flag[i]) ok_f = 0; end
          else if ((r * p - q) > 1e-6 * q || (q - r * p) > 1e-6 * q)
            if (flag[i] != (r * p < q)) ok_f = 0;
        end
      end
      check(ok_v, $sformatf("stage-1 lane values of line %0d", n1));
      check(ok_f, $sformatf("stage-1 accept flags of line %0d", n1));
      n1++;
    end
  end

  // stage-2 checker
  int n2 = 0;
  always @(posedge clk) begin
    #1;
    if (out2_valid) begin
      real tot, rs, best;
      int  am;
      bit  ok_r;
      check(out2_tag == 16'(n2 + 100), "stage-2 tag");
      tot = 0.0; ok_r = 1;
      for (int r = 0; r < ROWS; r++) begin
        rs = 0.0;
        for (int c = 0; c < COLS; c++) rs += lane_ref(n2, r*COLS + c);
        tot += rs;
        if (!close(fp32_to_real(row_sum[r]), rs, (rs < 0 ? -rs : rs) + 1e-3)) ok_r = 0;
      end
      check(ok_r, $sformatf("row sums of line %0d", n2));
      check(close(fp32_to_real(line_sum), tot, (tot < 0 ? -tot : tot) + 1e-3),
            $sformatf("line sum of line %0d: %g vs %g", n2, fp32_to_real(line_sum), tot));
      if (O[n2] == OP_PASS_A) begin
        am = 0; best = lane_ref(n2, 0);
        for (int i = 1; i < C[n2]; i++) if (lane_ref(n2, i) > best) begin best = lane_ref(n2, i); am = i; end
        check(int'(line_argmax) == am && fp32_to_real(line_max) == best && line_any,
              $sformatf("argmax of line %0d: %0d vs %0d", n2, line_argmax, am));
      end
      n2++;
      if (n2 == NL) begin
        check(n1 == NL, "all lines through stage 1");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  // latency: the first line enters after reset and comes out 1 and 2 cycles later
  initial begin
    int t_in, t1, t2;
    @(posedge rst_n);
    @(posedge clk iff in_valid); t_in = $time;
    @(posedge clk iff out1_valid); t1 = $time;
    @(posedge clk iff out2_valid); t2 = $time;
    check((t1 - t_in) == 10 && (t2 - t_in) == 20, $sformatf("pipeline latency %0d/%0d", t1 - t_in, t2 - t_in));
  end

endmodule
