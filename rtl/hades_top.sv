// hades_top: speculative-decoding verification accelerator.
//
// The unit sits next to an existing LLM accelerator. That accelerator runs the
// draft model gamma times and the target model once, and writes the resulting
// distributions and the gamma draft tokens into the local buffer through the
// host write port. A start command then runs the verification phase entirely
// on chip and returns how many draft tokens were accepted and the next token
// (the correction token after a rejection, or the bonus token when every
// draft token was accepted).
//
// Structure (following the architecture's block diagram):
//   local buffer (480 KB: target_logits, draft_logits, draft_tokens)
//     -> 8 x 64 FPU array (one 512-entry line per cycle, with reductions)
//     -> verification controller (Algorithm 1 sequencing, greedy mode)
//   RNG queue -> controller (random numbers for accept tests and sampling)
// The buffer's three read ports feed the array directly: lane i of the array
// sees entry i of the target line and entry i of the draft line.
//
// Interface: host writes (wr_en, wr_bank, wr_addr, wr_line/wr_tok) load the
// buffer while busy is low; seed_load/seed restart the random generator;
// start with mode/gamma/vocab_size begins a verification; done pulses when
// n_accepted/next_token/all_accepted are valid. The ev_* outputs pulse once
// per accepted token, rejection, bonus token, cycle stalled on an empty
// random queue, and residual-to-target fallback. Distribution k occupies
// lines k*ceil(V/512) .. k*ceil(V/512)+ceil(V/512)-1 of its bank; entries of
// the last line beyond V are ignored.
module hades_top
  import hades_pkg::*;
#(
  parameter int unsigned TGT_LINES = 240,   // 240 KB of target distributions
  parameter int unsigned DRF_LINES = 240,   // 240 KB of draft distributions
  parameter int unsigned TOK_DEPTH = 16,    // largest gamma
  parameter int unsigned RNG_DEPTH = 8,
  parameter int unsigned ADDR_W    = 16,
  parameter int unsigned GAMMA_W   = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  // host write port into the local buffer
  input  logic               wr_en,
  input  bank_e              wr_bank,
  input  logic [ADDR_W-1:0]  wr_addr,
  input  line_t              wr_line,
  input  token_t             wr_tok,
  // random generator seed
  input  logic               seed_load,
  input  logic [31:0]        seed,
  // command / status
  input  logic               start,
  input  verify_mode_e       mode,
  input  logic [GAMMA_W-1:0] gamma,
  input  logic [VOCAB_W-1:0] vocab_size,
  output logic               busy,
  output logic               done,
  output logic               cap_error,
  output logic [GAMMA_W-1:0] n_accepted,
  output token_t             next_token,
  output logic               all_accepted,
  output logic               ev_accept,
  output logic               ev_reject,
  output logic               ev_bonus,
  output logic               ev_rng_stall,
  output logic               ev_resid_fallback
);

  // buffer <-> controller
  logic              tgt_rd_en, drf_rd_en, tok_rd_en;
  logic [ADDR_W-1:0] tgt_rd_addr, drf_rd_addr, tok_rd_addr;
  line_t             target_logits, draft_logits;
  token_t            draft_tokens;

  // array <-> controller
  logic                       arr_in_valid;
  alu_op_e                    arr_op;
  logic [$clog2(LANES+1)-1:0] arr_lane_cnt;
  fp32_t                      arr_s;
  logic [15:0]                arr_tag;
  logic                       arr_out1_valid, arr_out2_valid;
  logic [15:0]                arr_out1_tag, arr_out2_tag;
  fp32_t                      arr_val [LANES];
  logic [LANES-1:0]           arr_flag;
  fp32_t                      arr_row_sum [ROWS];
  fp32_t                      arr_line_sum, arr_line_max;
  logic [$clog2(LANES)-1:0]   arr_line_argmax;
  logic                       arr_line_any;

  // rng <-> controller
  logic        rng_pop, rng_valid;
  fp32_t       rng_data;
  logic [23:0] rng_raw;

  hades_local_buffer #(
    .TGT_LINES(TGT_LINES), .DRF_LINES(DRF_LINES),
    .TOK_DEPTH(TOK_DEPTH), .ADDR_W(ADDR_W)
  ) u_buf (
    .clk        (clk),
    .wr_en      (wr_en && !busy),
    .wr_bank    (wr_bank),
    .wr_addr    (wr_addr),
    .wr_line    (wr_line),
    .wr_tok     (wr_tok),
    .tgt_rd_en  (tgt_rd_en),
    .tgt_rd_addr(tgt_rd_addr),
    .tgt_rd_data(target_logits),
    .drf_rd_en  (drf_rd_en),
    .drf_rd_addr(drf_rd_addr),
    .drf_rd_data(draft_logits),
    .tok_rd_en  (tok_rd_en),
    .tok_rd_addr(tok_rd_addr),
    .tok_rd_data(draft_tokens)
  );

  hades_fpu_array #(.N_ROWS(ROWS), .N_COLS(COLS), .TAG_W(16)) u_array (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (arr_in_valid),
    .op         (arr_op),
    .lane_cnt   (arr_lane_cnt),
    .a_line     (target_logits),
    .b_line     (draft_logits),
    .s          (arr_s),
    .in_tag     (arr_tag),
    .out1_valid (arr_out1_valid),
    .out1_tag   (arr_out1_tag),
    .val        (arr_val),
    .flag       (arr_flag),
    .out2_valid (arr_out2_valid),
    .out2_tag   (arr_out2_tag),
    .row_sum    (arr_row_sum),
    .line_sum   (arr_line_sum),
    .line_max   (arr_line_max),
    .line_argmax(arr_line_argmax),
    .line_any   (arr_line_any)
  );

  hades_rng_queue #(.DEPTH(RNG_DEPTH)) u_rng (
    .clk      (clk),
    .rst_n    (rst_n),
    .seed_load(seed_load && !busy),
    .seed     (seed),
    .pop      (rng_pop),
    .out_valid(rng_valid),
    .out_data (rng_data),
    .out_raw  (rng_raw)
  );

  hades_verify_ctrl #(
    .TGT_LINES(TGT_LINES), .DRF_LINES(DRF_LINES), .TOK_DEPTH(TOK_DEPTH),
    .ADDR_W(ADDR_W), .GAMMA_W(GAMMA_W)
  ) u_ctrl (
    .clk              (clk),
    .rst_n            (rst_n),
    .start            (start),
    .mode             (mode),
    .gamma            (gamma),
    .vocab_size       (vocab_size),
    .busy             (busy),
    .done             (done),
    .cap_error        (cap_error),
    .n_accepted       (n_accepted),
    .next_token       (next_token),
    .all_accepted     (all_accepted),
    .ev_accept        (ev_accept),
    .ev_reject        (ev_reject),
    .ev_bonus         (ev_bonus),
    .ev_rng_stall     (ev_rng_stall),
    .ev_resid_fallback(ev_resid_fallback),
    .tgt_rd_en        (tgt_rd_en),
    .tgt_rd_addr      (tgt_rd_addr),
    .drf_rd_en        (drf_rd_en),
    .drf_rd_addr      (drf_rd_addr),
    .tok_rd_en        (tok_rd_en),
    .tok_rd_addr      (tok_rd_addr),
    .tok_rd_data      (draft_tokens),
    .arr_in_valid     (arr_in_valid),
    .arr_op           (arr_op),
    .arr_lane_cnt     (arr_lane_cnt),
    .arr_s            (arr_s),
    .arr_tag          (arr_tag),
    .arr_out1_valid   (arr_out1_valid),
    .arr_val          (arr_val),
    .arr_flag         (arr_flag),
    .arr_out2_valid   (arr_out2_valid),
    .arr_out2_tag     (arr_out2_tag),
    .arr_row_sum      (arr_row_sum),
    .arr_line_sum     (arr_line_sum),
    .arr_line_max     (arr_line_max),
    .arr_line_argmax  (arr_line_argmax),
    .arr_line_any     (arr_line_any),
    .rng_pop          (rng_pop),
    .rng_valid        (rng_valid),
    .rng_data         (rng_data)
  );

endmodule
