// tb_hades_local_buffer: checks the three-bank local buffer at its full size.
// Every line of the target and draft banks and every token entry is written
// with a distinct pattern, then all three read ports are exercised in the same
// cycles with random addresses. Data must appear exactly one cycle after the
// request and hold while the read enable is low; writes to addresses past a
// bank's end must not disturb it.
module tb_hades_local_buffer;
  import hades_pkg::*;

  localparam int TL = 240, DL = 240, TD = 16;

  logic        clk = 1'b0;
  logic        wr_en = 1'b0;
  bank_e       wr_bank = BANK_TGT;
  logic [15:0] wr_addr = '0;
  line_t       wr_line = '0;
  token_t      wr_tok = '0;
  logic        tgt_rd_en = 1'b0, drf_rd_en = 1'b0, tok_rd_en = 1'b0;
  logic [15:0] tgt_rd_addr = '0, drf_rd_addr = '0, tok_rd_addr = '0;
  line_t       tgt_rd_data, drf_rd_data;
  token_t      tok_rd_data;
  int          checks = 0, failures = 0;

  always #5 clk = ~clk;

  hades_local_buffer dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // line pattern: every entry distinct per bank/line/lane
  function automatic line_t pat(input int bank, input int l);
    line_t x;
    for (int i = 0; i < LANES; i++) x[i] = 16'((bank * 7919 + l * 613 + i * 31) ^ (l << 4));
    return x;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < TL; l++) begin
      @(negedge clk); wr_en = 1; wr_bank = BANK_TGT; wr_addr = 16'(l); wr_line = pat(0, l);
    end
    for (int l = 0; l < DL; l++) begin
      @(negedge clk); wr_en = 1; wr_bank = BANK_DRF; wr_addr = 16'(l); wr_line = pat(1, l);
    end
    for (int k = 0; k < TD; k++) begin
      @(negedge clk); wr_en = 1; wr_bank = BANK_TOK; wr_addr = 16'(k); wr_tok = token_t'(1000 + 37 * k);
    end
    // out-of-range writes
    @(negedge clk); wr_en = 1; wr_bank = BANK_TGT; wr_addr = 16'(TL); wr_line = '1;
    @(negedge clk); wr_en = 1; wr_bank = BANK_DRF; wr_addr = 16'(DL + 5); wr_line = '1;
    @(negedge clk); wr_en = 1; wr_bank = BANK_TOK; wr_addr = 16'(TD); wr_tok = '1;
    @(negedge clk); wr_en = 0;

    for (int it = 0; it < 300; it++) begin
      int ta, da, ka;
      ta = $urandom_range(TL - 1, 0); da = $urandom_range(DL - 1, 0); ka = $urandom_range(TD - 1, 0);
      if (it < 2) begin ta = (it == 0) ? 0 : TL - 1; da = (it == 0) ? DL - 1 : 0; ka = (it == 0) ? 0 : TD - 1; end
      @(negedge clk);
      tgt_rd_en = 1; drf_rd_en = 1; tok_rd_en = 1;
      tgt_rd_addr = 16'(ta); drf_rd_addr = 16'(da); tok_rd_addr = 16'(ka);
      @(negedge clk);
      tgt_rd_en = 0; drf_rd_en = 0; tok_rd_en = 0;
      tgt_rd_addr = 16'($urandom_range(TL - 1, 0));
      check(tgt_rd_data == pat(0, ta), $sformatf("target line %0d", ta));
      check(drf_rd_data == pat(1, da), $sformatf("draft line %0d", da));
      check(tok_rd_data == token_t'(1000 + 37 * ka), $sformatf("token %0d", ka));
      @(negedge clk);
      check(tgt_rd_data == pat(0, ta), "read data holds without enable");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
