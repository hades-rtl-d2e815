// tb_hades_rng_queue: checks the random-number queue against an independent
// xorshift32 model. After a seed load the queue must become valid two cycles
// later, fill to its depth, and deliver the model's sequence, converted to
// fp32 exactly, under random pop patterns; a zero seed must fall back to the
// default seed, and a new seed must flush what was queued.
module tb_hades_rng_queue;
  import hades_pkg::*;
  import hades_tb_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        seed_load = 1'b0, pop = 1'b0;
  logic [31:0] seed = '0;
  logic        out_valid;
  fp32_t       out_data;
  logic [23:0] out_raw;
  int          checks = 0, failures = 0;
  logic [31:0] ms;

  always #5 clk = ~clk;

  hades_rng_queue dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input logic [31:0] sd);
    @(negedge clk); seed = sd; seed_load = 1;
    @(negedge clk); seed_load = 0;
    ms = (sd == 0) ? 32'h2545_F491 : sd;
    check(!out_valid, "empty right after seed load");
    @(negedge clk);
    check(out_valid, "valid two cycles after seed load");
  endtask

  task automatic drain(input int n, input int pop_pct);
    int got;
    got = 0;
    while (got < n) begin
      @(negedge clk);
      pop = out_valid && ($urandom_range(99, 0) < pop_pct);
      if (pop) begin
        ms = xs32_next(ms);
        check(out_raw == ms[31:8], $sformatf("raw value %h expected %h", out_raw, ms[31:8]));
        check(fp32_to_real(out_data) == xs32_frac(ms), "fp32 conversion");
        got++;
      end
    end
    @(negedge clk); pop = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    load(32'hDEAD_BEEF);
    drain(200, 100);                 // pop every cycle
    load(32'h0000_0001);
    repeat (20) @(negedge clk);      // let it fill
    check(dut.count == 4'(8), "queue fills to its depth");
    drain(300, 30);
    load(32'h0);                     // zero seed
    drain(50, 70);
    load(32'h1357_9BDF);             // flush mid-stream
    drain(5, 100);
    load(32'h2468_ACE0);
    drain(20, 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
