// hades_local_buffer: the 480 KB on-chip buffer of the verification unit.
//
// Verification touches only tokens and per-position output distributions, so
// all of them are held on chip. The buffer has three banks, one per signal the
// architecture names:
//   target_logits : TGT_LINES lines of 512 fp16 entries (1 KB per line),
//   draft_logits  : DRF_LINES lines of 512 fp16 entries,
//   draft_tokens  : TOK_DEPTH token ids of 16 bits.
// With the defaults (240 + 240 lines) the two distribution banks hold exactly
// 480 KB; the token bank adds 32 bytes. Distribution k (position k of the
// speculation window) starts at line k * ceil(V/512) of its bank.
//
// Each bank has its own synchronous read port (data valid the cycle after the
// request), so one target line, one draft line and one token can be read in
// the same cycle. A single host write port loads lines or tokens; the model
// accelerator that produces the distributions sits outside this unit.
// The total size and the three signal names follow the architecture; the
// split into banks, the 1 KB line and the ports are this design's choices.
module hades_local_buffer
  import hades_pkg::*;
#(
  parameter int unsigned TGT_LINES = 240,
  parameter int unsigned DRF_LINES = 240,
  parameter int unsigned TOK_DEPTH = 16,
  parameter int unsigned ADDR_W    = 16
) (
  input  logic              clk,
  // host write port
  input  logic              wr_en,
  input  bank_e             wr_bank,
  input  logic [ADDR_W-1:0] wr_addr,
  input  line_t             wr_line,     // used for BANK_TGT / BANK_DRF
  input  token_t            wr_tok,      // used for BANK_TOK
  // target_logits read port
  input  logic              tgt_rd_en,
  input  logic [ADDR_W-1:0] tgt_rd_addr,
  output line_t             tgt_rd_data,
  // draft_logits read port
  input  logic              drf_rd_en,
  input  logic [ADDR_W-1:0] drf_rd_addr,
  output line_t             drf_rd_data,
  // draft_tokens read port
  input  logic              tok_rd_en,
  input  logic [ADDR_W-1:0] tok_rd_addr,
  output token_t            tok_rd_data
);

  line_t  tgt_mem [TGT_LINES];
  line_t  drf_mem [DRF_LINES];
  token_t tok_mem [TOK_DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      unique case (wr_bank)
        BANK_TGT: if (int'(wr_addr) < TGT_LINES) tgt_mem[rd_clip(wr_addr, TGT_LINES)] <= wr_line;
        BANK_DRF: if (int'(wr_addr) < DRF_LINES) drf_mem[rd_clip(wr_addr, DRF_LINES)] <= wr_line;
        BANK_TOK: if (int'(wr_addr) < TOK_DEPTH) tok_mem[rd_clip(wr_addr, TOK_DEPTH)] <= wr_tok;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (tgt_rd_en) tgt_rd_data <= tgt_mem[rd_clip(tgt_rd_addr, TGT_LINES)];
    if (drf_rd_en) drf_rd_data <= drf_mem[rd_clip(drf_rd_addr, DRF_LINES)];
    if (tok_rd_en) tok_rd_data <= tok_mem[rd_clip(tok_rd_addr, TOK_DEPTH)];
  end

  // Out-of-range reads return entry 0 (the controller never issues them).
  function automatic int unsigned rd_clip(input logic [ADDR_W-1:0] a,
                                                input int unsigned depth);
    return (int'(a) < depth) ? int'(a) : 0;
  endfunction

endmodule
