// hades_verify_ctrl: sequencer of the verification phase of speculative decoding.
//
// After the draft model has proposed gamma tokens and the target model has
// scored all gamma+1 positions, the buffer holds, for each position k, the
// target distribution q_k and (for k < gamma) the draft distribution p_k, plus
// the draft tokens x_k. This controller runs the verification loop of
// Algorithm 1 (speculative sampling) on that data:
//   for k = 0 .. gamma-1:
//     draw r from the RNG queue; accept x_k if r < min(1, q_k[x_k]/p_k[x_k]);
//     on the first rejection sample the correction token from
//     norm(max(0, q_k - p_k)) and stop;
//   if all gamma tokens are accepted, sample the bonus token from q_gamma.
// In greedy mode (mode = MODE_GREEDY) x_k is accepted iff it is the argmax of
// q_k, the correction token is that argmax, and the bonus token is the argmax
// of q_gamma; no random numbers are used and the draft bank is not read.
//
// How a token is sampled. Sampling uses the inverse cumulative distribution
// over the 512-entry lines of the buffer, in three steps:
//   1. SUM pass: every line of the distribution goes through the FPU array
//      (one line per cycle, pipelined) and the line sums are added up: total.
//   2. A number u is taken from the RNG queue and thr = u * total.
//      SEARCH pass: the line sums are accumulated again in the same order and
//      the first line whose running sum exceeds thr is selected; issuing stops
//      and the pipeline drains.
//   3. That line is read once more; its 8 row sums are scanned (one per
//      cycle) to find the row, then the 64 lane values of that row (one per
//      cycle) to find the entry. Rounding differences between the adder tree
//      and the sequential scan are covered by falling back to the last
//      non-zero row/lane/line, so a token with non-zero weight is always
//      returned.
// If the residual distribution is all zero (q_k == p_k, only reachable with
// rounding), the token is sampled from q_k instead.
// Greedy positions use an ARGMAX pass: every line goes through the array and
// the largest entry (lowest index on ties) is kept.
//
// Interface: start (one cycle, while busy is low) latches mode, gamma and
// vocab_size. done pulses for one cycle with n_accepted, next_token and
// all_accepted valid from then until the next start. cap_error is raised with
// done, and nothing is verified, if the window does not fit the buffer:
// (gamma+1)*ceil(V/512) > TGT_LINES, gamma*ceil(V/512) > DRF_LINES (sampling
// mode), gamma > TOK_DEPTH or V == 0.
// Timing, with L = ceil(V/512), counted from the edge that samples start to
// the edge that raises done: 2 cycles for the command check and the result;
// 4 cycles per tested draft token in sampling mode (token read, line read,
// array stage 1, decision) plus one per cycle the RNG queue is empty; a sample
// that lands on line j, row r, column c takes (L+3) + 1 + (min(L-1, j+3) + 4)
// + 1 + 3 + (r+1) + (c+1) cycles, plus L+3 for an empty-residual fallback; a
// greedy position takes L+5 cycles and the greedy bonus L+3.
// tok_rd_addr uses the buffer's common address width; only its low GAMMA_W
// bits can be non-zero, since the token bank holds at most TOK_DEPTH tokens.
// The algorithm is the one the design is built for; the pass structure, the
// pipelining and the greedy mode's implementation are this design's choices.
module hades_verify_ctrl
  import hades_pkg::*;
#(
  parameter int unsigned TGT_LINES = 240,
  parameter int unsigned DRF_LINES = 240,
  parameter int unsigned TOK_DEPTH = 16,
  parameter int unsigned ADDR_W    = 16,
  parameter int unsigned GAMMA_W   = 5
) (
  input  logic               clk,
  input  logic               rst_n,
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
  // event pulses (one cycle each)
  output logic               ev_accept,
  output logic               ev_reject,
  output logic               ev_bonus,
  output logic               ev_rng_stall,
  output logic               ev_resid_fallback,
  // local buffer read ports
  output logic               tgt_rd_en,
  output logic [ADDR_W-1:0]  tgt_rd_addr,
  output logic               drf_rd_en,
  output logic [ADDR_W-1:0]  drf_rd_addr,
  output logic               tok_rd_en,
  output logic [ADDR_W-1:0]  tok_rd_addr,
  input  token_t             tok_rd_data,
  // FPU array
  output logic               arr_in_valid,
  output alu_op_e            arr_op,
  output logic [$clog2(LANES+1)-1:0] arr_lane_cnt,
  output fp32_t              arr_s,
  output logic [15:0]        arr_tag,
  input  logic               arr_out1_valid,
  input  fp32_t              arr_val [LANES],
  input  logic [LANES-1:0]   arr_flag,
  input  logic               arr_out2_valid,
  input  logic [15:0]        arr_out2_tag,
  input  fp32_t              arr_row_sum [ROWS],
  input  fp32_t              arr_line_sum,
  input  fp32_t              arr_line_max,
  input  logic [$clog2(LANES)-1:0] arr_line_argmax,
  input  logic               arr_line_any,
  // RNG queue
  output logic               rng_pop,
  input  logic               rng_valid,
  input  fp32_t              rng_data
);

  localparam int unsigned LW = $clog2(LANES);   // 9
  localparam int unsigned CW = $clog2(COLS);    // 6
  localparam int unsigned RW = $clog2(ROWS);    // 3
  localparam int unsigned NW = $clog2(LANES+1); // 10

  typedef enum logic [3:0] {
    S_IDLE, S_CHECK, S_TOK, S_TOKW, S_ACCW, S_PASS, S_DRAW,
    S_FETCH, S_FETCHW, S_ROW, S_COL, S_FINISH
  } state_e;

  typedef enum logic [1:0] { PK_SUM, PK_SEARCH, PK_MAX } pass_e;

  state_e             st;
  pass_e              pk;
  verify_mode_e       mode_q;
  logic [GAMMA_W-1:0] gamma_q, k;
  logic [VOCAB_W-1:0] vocab_q;
  logic [ADDR_W-1:0]  vl, base;
  logic [NW-1:0]      last_cnt;
  token_t             tok_k;
  logic [LW-1:0]      acc_lane;
  alu_op_e            op_q;
  fp32_t              s_q, total, thr, acc;
  logic [ADDR_W-1:0]  iss_j, rcv_j;
  logic               found;
  logic [ADDR_W-1:0]  found_line, lnz_line;
  fp32_t              lnz_acc;
  fp32_t              best_v;
  logic [31:0]        best_idx;
  logic               best_any;
  logic [RW-1:0]      row;
  logic [CW-1:0]      col;
  logic [RW-1:0]      lnz_row;
  fp32_t              lnz_row_acc;
  logic [CW-1:0]      lnz_col;
  logic               lnz_row_ok, lnz_col_ok;

  // one-cycle delayed line issue: buffer data arrives with the array valid
  logic               iss_d;
  logic [15:0]        tag_d;
  logic [NW-1:0]      cnt_d;

  // --------------------------------------------------------- helpers
  function automatic logic [NW-1:0] lane_cnt_of(input logic [ADDR_W-1:0] line,
                                                 input logic [ADDR_W-1:0] nl,
                                                 input logic [NW-1:0] lastc);
    return (line == nl - 1'b1) ? lastc : NW'(LANES);
  endfunction

  logic [ADDR_W-1:0] vl_calc;
  assign vl_calc  = ADDR_W'((32'(vocab_q) + LANES - 1) >> LW);

  logic pass_line_rx;
  assign pass_line_rx = arr_out2_valid && arr_out2_tag[15];

  fp32_t sum_line, sum_row, sum_col, cur_val;
  assign sum_line = fp32_add(acc, arr_line_sum);
  assign sum_row  = fp32_add(acc, arr_row_sum[row]);
  assign cur_val  = arr_val[{row, col}];
  assign sum_col  = fp32_add(acc, cur_val);

  logic issue_now;
  logic [ADDR_W-1:0] issue_line;

  always_comb begin
    issue_now  = (st == S_PASS) && (iss_j < vl) && !found;
    issue_line = base + iss_j;
  end

  // Buffer read requests.
  always_comb begin
    tgt_rd_en   = 1'b0;
    drf_rd_en   = 1'b0;
    tok_rd_en   = 1'b0;
    tgt_rd_addr = '0;
    drf_rd_addr = '0;
    tok_rd_addr = ADDR_W'(k);
    rng_pop     = 1'b0;
    ev_rng_stall = 1'b0;
    unique case (st)
      S_TOK: begin
        if (mode_q == MODE_GREEDY) begin
          tok_rd_en = 1'b1;
        end else if (rng_valid) begin
          tok_rd_en = 1'b1;
          rng_pop   = 1'b1;
        end else begin
          ev_rng_stall = 1'b1;
        end
      end
      S_TOKW: begin
        if (mode_q == MODE_SAMPLE) begin
          tgt_rd_en   = 1'b1;
          drf_rd_en   = 1'b1;
          tgt_rd_addr = base + ADDR_W'(tok_rd_data >> LW);
          drf_rd_addr = base + ADDR_W'(tok_rd_data >> LW);
        end
      end
      S_PASS: begin
        tgt_rd_en   = issue_now;
        drf_rd_en   = issue_now && (op_q != OP_PASS_A);
        tgt_rd_addr = issue_line;
        drf_rd_addr = issue_line;
      end
      S_DRAW: begin
        rng_pop      = rng_valid;
        ev_rng_stall = !rng_valid;
      end
      S_FETCH: begin
        tgt_rd_en   = 1'b1;
        drf_rd_en   = (op_q != OP_PASS_A);
        tgt_rd_addr = base + found_line;
        drf_rd_addr = base + found_line;
      end
      default: ;
    endcase
  end

  assign arr_in_valid = iss_d;
  assign arr_tag      = tag_d;
  assign arr_lane_cnt = cnt_d;
  assign arr_op       = op_q;
  assign arr_s        = s_q;
  assign busy         = (st != S_IDLE);

  // --------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      pk <= PK_SUM;
      mode_q <= MODE_SAMPLE;
      gamma_q <= '0; k <= '0; vocab_q <= '0;
      vl <= '0; base <= '0; last_cnt <= '0;
      tok_k <= '0; acc_lane <= '0;
      op_q <= OP_PASS_A;
      s_q <= FP32_ZERO; total <= FP32_ZERO; thr <= FP32_ZERO; acc <= FP32_ZERO;
      iss_j <= '0; rcv_j <= '0; found <= 1'b0;
      found_line <= '0; lnz_line <= '0; lnz_acc <= FP32_ZERO;
      best_v <= FP32_ZERO; best_idx <= '0; best_any <= 1'b0;
      row <= '0; col <= '0; lnz_row <= '0; lnz_row_acc <= FP32_ZERO; lnz_col <= '0;
      lnz_row_ok <= 1'b0; lnz_col_ok <= 1'b0;
      iss_d <= 1'b0; tag_d <= '0; cnt_d <= '0;
      done <= 1'b0; cap_error <= 1'b0;
      n_accepted <= '0; next_token <= '0; all_accepted <= 1'b0;
      ev_accept <= 1'b0; ev_reject <= 1'b0; ev_bonus <= 1'b0; ev_resid_fallback <= 1'b0;
    end else begin
      done <= 1'b0;
      ev_accept <= 1'b0; ev_reject <= 1'b0; ev_bonus <= 1'b0; ev_resid_fallback <= 1'b0;

      // delayed issue to the array (line reads of passes, accept test, fetch)
      iss_d <= 1'b0;
      if (st == S_PASS && issue_now) begin
        iss_d <= 1'b1;
        tag_d <= {1'b1, 15'(iss_j)};
        cnt_d <= lane_cnt_of(iss_j, vl, last_cnt);
      end else if (st == S_TOKW && mode_q == MODE_SAMPLE) begin
        iss_d <= 1'b1;
        tag_d <= '0;
        cnt_d <= lane_cnt_of(ADDR_W'(tok_rd_data >> LW), vl, last_cnt);
      end else if (st == S_FETCH) begin
        iss_d <= 1'b1;
        tag_d <= '0;
        cnt_d <= lane_cnt_of(found_line, vl, last_cnt);
      end

      unique case (st)
        S_IDLE: begin
          if (start) begin
            mode_q  <= mode;
            gamma_q <= gamma;
            vocab_q <= vocab_size;
            k       <= '0;
            base    <= '0;
            cap_error <= 1'b0;
            all_accepted <= 1'b0;
            st      <= S_CHECK;
          end
        end

        S_CHECK: begin
          // vl is written here and used from the next cycle on
          vl       <= vl_calc;
          last_cnt <= NW'(32'(vocab_q) - (32'(vl_calc) - 1) * LANES);
          st       <= S_FINISH;   // overwritten below when the window fits
          if (vocab_q == '0 || int'(gamma_q) > TOK_DEPTH ||
              (32'(gamma_q) + 1) * 32'(vl_calc) > TGT_LINES ||
              (mode_q == MODE_SAMPLE && 32'(gamma_q) * 32'(vl_calc) > DRF_LINES)) begin
            cap_error  <= 1'b1;
            n_accepted <= '0;
            next_token <= '0;
          end else begin
            st <= (gamma_q == '0) ? S_PASS : S_TOK;
            if (gamma_q == '0) begin
              start_bonus();
            end
          end
        end

        S_TOK: begin
          if (mode_q == MODE_GREEDY || rng_valid) begin
            if (mode_q == MODE_SAMPLE) s_q <= rng_data;
            op_q <= OP_ACCEPT;
            st   <= S_TOKW;
          end
        end

        S_TOKW: begin
          tok_k    <= tok_rd_data;
          acc_lane <= tok_rd_data[LW-1:0];
          if (mode_q == MODE_GREEDY) begin
            op_q <= OP_PASS_A;
            pk   <= PK_MAX;
            start_pass();
            st   <= S_PASS;
          end else begin
            st <= S_ACCW;
          end
        end

        S_ACCW: begin
          if (arr_out1_valid) begin
            if (arr_flag[acc_lane]) begin
              accept_token();
            end else begin
              ev_reject <= 1'b1;
              op_q <= OP_RESID;
              pk   <= PK_SUM;
              start_pass();
              st   <= S_PASS;
            end
          end
        end

        S_PASS: begin
          if (issue_now) iss_j <= iss_j + 1'b1;
          if (pass_line_rx) begin
            rcv_j <= rcv_j + 1'b1;
            unique case (pk)
              PK_SUM: total <= fp32_add(total, arr_line_sum);
              PK_MAX: begin
                if (arr_line_any && (!best_any || fp32_lt(best_v, arr_line_max))) begin
                  best_v   <= arr_line_max;
                  best_idx <= 32'(arr_out2_tag[14:0]) * LANES + 32'(arr_line_argmax);
                  best_any <= 1'b1;
                end
              end
              PK_SEARCH: begin
                if (!found) begin
                  if (!fp32_is_zero(arr_line_sum)) begin
                    lnz_line <= ADDR_W'(arr_out2_tag[14:0]);
                    lnz_acc  <= acc;
                  end
                  if (fp32_lt(thr, sum_line)) begin
                    found      <= 1'b1;
                    found_line <= ADDR_W'(arr_out2_tag[14:0]);
                  end else begin
                    acc <= sum_line;
                  end
                end
              end
              default: ;
            endcase
          end
          // pass complete: everything issued has come back
          if ((rcv_j + ADDR_W'(pass_line_rx)) == iss_j + ADDR_W'(issue_now) &&
              ((iss_j + ADDR_W'(issue_now)) == vl || found ||
               (pk == PK_SEARCH && pass_line_rx && !found && fp32_lt(thr, sum_line)))) begin
            end_pass();
          end
        end

        S_DRAW: begin
          if (rng_valid) begin
            thr <= fp32_mul(rng_data, total);
            acc <= FP32_ZERO;
            pk  <= PK_SEARCH;
            start_pass();
            st  <= S_PASS;
          end
        end

        S_FETCH: st <= S_FETCHW;

        S_FETCHW: begin
          if (arr_out2_valid && !arr_out2_tag[15]) begin
            row        <= '0;
            lnz_row_ok <= 1'b0;
            st         <= S_ROW;
          end
        end

        S_ROW: begin
          if (!fp32_is_zero(arr_row_sum[row])) begin
            lnz_row     <= row;
            lnz_row_acc <= acc;
            lnz_row_ok  <= 1'b1;
          end
          col        <= '0;
          lnz_col_ok <= 1'b0;
          if (fp32_lt(thr, sum_row)) begin
            st <= S_COL;
          end else if (row == RW'(ROWS - 1)) begin
            // rounding fallback: last row with weight
            if (fp32_is_zero(arr_row_sum[row]) && lnz_row_ok) begin
              row <= lnz_row;
              acc <= lnz_row_acc;
            end
            st <= S_COL;
          end else begin
            acc <= sum_row;
            row <= row + 1'b1;
          end
        end

        S_COL: begin
          if (!fp32_is_zero(cur_val)) begin
            lnz_col    <= col;
            lnz_col_ok <= 1'b1;
          end
          if (fp32_lt(thr, sum_col)) begin
            emit_sample(col);
          end else if (col == CW'(COLS - 1)) begin
            emit_sample(!fp32_is_zero(cur_val) ? col : (lnz_col_ok ? lnz_col : '0));
          end else begin
            acc <= sum_col;
            col <= col + 1'b1;
          end
        end

        S_FINISH: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end

        default: st <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------ sequencer subroutines
  task automatic start_pass();
    iss_j    <= '0;
    rcv_j    <= '0;
    found    <= 1'b0;
    total    <= FP32_ZERO;
    best_any <= 1'b0;
    lnz_line <= '0;
    lnz_acc  <= FP32_ZERO;
  endtask

  // Bonus token: sample (or take the argmax of) q_gamma.
  task automatic start_bonus();
    op_q <= OP_PASS_A;
    pk   <= (mode_q == MODE_GREEDY) ? PK_MAX : PK_SUM;
    start_pass();
  endtask

  task automatic accept_token();
    ev_accept <= 1'b1;
    k         <= k + 1'b1;
    base      <= base + vl;
    if (k + 1'b1 == gamma_q) begin
      st <= S_PASS;
      start_bonus();
    end else begin
      st <= S_TOK;
    end
  endtask

  task automatic end_pass();
    unique case (pk)
      PK_SUM: begin
        if (fp32_is_zero(pass_line_rx ? fp32_add(total, arr_line_sum) : total)) begin
          if (op_q == OP_RESID) begin
            // residual has no weight: sample from q_k instead
            ev_resid_fallback <= 1'b1;
            op_q <= OP_PASS_A;
            start_pass();
            st <= S_PASS;
          end else begin
            finish_with(token_t'(0));
          end
        end else begin
          st <= S_DRAW;
        end
      end
      PK_SEARCH: begin
        if (!found && !(pass_line_rx && fp32_lt(thr, sum_line))) begin
          // rounding fallback: last line with weight
          found_line <= lnz_line;
          acc        <= lnz_acc;
        end
        st <= S_FETCH;
      end
      default: begin  // PK_MAX: greedy decision
        token_t bi;
        bi = token_t'(best_idx);
        if (pass_line_rx && arr_line_any && (!best_any || fp32_lt(best_v, arr_line_max)))
          bi = token_t'(32'(arr_out2_tag[14:0]) * LANES + 32'(arr_line_argmax));
        if (k != gamma_q && bi == tok_k) begin
          accept_token();
        end else begin
          if (k != gamma_q) ev_reject <= 1'b1;
          finish_with(bi);
        end
      end
    endcase
  endtask

  task automatic finish_with(input token_t t);
    next_token   <= t;
    n_accepted   <= k;
    all_accepted <= (k == gamma_q);
    ev_bonus     <= (k == gamma_q);
    st           <= S_FINISH;
  endtask

  task automatic emit_sample(input logic [CW-1:0] c);
    finish_with(token_t'(32'(found_line) * LANES + 32'(row) * COLS + 32'(c)));
  endtask

endmodule
