// hades_fpu_array: the 8 x 64 array of FP ALUs.
//
// Every cycle the array may accept one buffer line: 512 target entries and the
// 512 draft entries of the same vocabulary indices. Lane (row r, column c)
// handles entry r*64 + c of the line. All lanes perform the same operation
// (see hades_fp_alu), giving 512 element results per cycle. Behind the lanes
// sit the reductions the controller needs:
//   - row_sum[r] : sum of the 64 lane values of row r (pairwise adder tree),
//   - line_sum   : sum of the 8 row sums,
//   - line_max / line_argmax : largest lane value among enabled lanes and its
//     lane index (lowest index on ties), used for greedy verification.
//
// Timing: a two-stage pipeline. in_valid at cycle t gives out1_valid (lane
// values, accept flags, enables) at t+1 and out2_valid (row sums, line sum,
// max, argmax) at t+2. The tag travels with the data on both stages.
// The 8 x 64 geometry follows the architecture; the reduction trees and the
// pipeline split are this design's choices. lane_cnt gives the number of valid
// lanes (the last line of a vocabulary is usually partial).
module hades_fpu_array
  import hades_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned N_COLS = COLS,
  parameter int unsigned TAG_W  = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  alu_op_e                    op,
  input  logic [$clog2(N_ROWS*N_COLS+1)-1:0] lane_cnt,
  input  logic [N_ROWS*N_COLS-1:0][15:0] a_line,   // q entries of the line
  input  logic [N_ROWS*N_COLS-1:0][15:0] b_line,   // p entries of the line
  input  fp32_t                      s,
  input  logic [TAG_W-1:0]           in_tag,
  // stage 1
  output logic                       out1_valid,
  output logic [TAG_W-1:0]           out1_tag,
  output fp32_t                      val  [N_ROWS*N_COLS],
  output logic [N_ROWS*N_COLS-1:0]   flag,
  // stage 2
  output logic                       out2_valid,
  output logic [TAG_W-1:0]           out2_tag,
  output fp32_t                      row_sum [N_ROWS],
  output fp32_t                      line_sum,
  output fp32_t                      line_max,
  output logic [$clog2(N_ROWS*N_COLS)-1:0] line_argmax,
  output logic                       line_any
);

  localparam int unsigned N   = N_ROWS * N_COLS;
  localparam int unsigned IW  = $clog2(N);

  // ------------------------------------------------------------- lanes
  fp32_t          lane_val  [N];
  logic [N-1:0]   lane_flag;
  logic [N-1:0]   lane_en;
  logic [N-1:0]   en_q;

  for (genvar i = 0; i < N; i++) begin : g_lane
    assign lane_en[i] = (i < int'(lane_cnt));
    hades_fp_alu u_alu (
      .op  (op),
      .en  (lane_en[i]),
      .a   (a_line[i]),
      .b   (b_line[i]),
      .s   (s),
      .val (lane_val[i]),
      .flag(lane_flag[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out1_valid <= 1'b0;
      out1_tag   <= '0;
      flag       <= '0;
      en_q       <= '0;
      for (int i = 0; i < N; i++) val[i] <= FP32_ZERO;
    end else begin
      out1_valid <= in_valid;
      if (in_valid) begin
        out1_tag <= in_tag;
        flag     <= lane_flag;
        en_q     <= lane_en;
        for (int i = 0; i < N; i++) val[i] <= lane_val[i];
      end
    end
  end

  // ------------------------------------------------------- reductions
  fp32_t          rs      [N_ROWS];
  fp32_t          lsum;
  fp32_t          mx_v;
  logic [IW-1:0]  mx_i;
  logic           mx_any;

  // Row sums: pairwise tree over the columns of each row.
  always_comb begin
    fp32_t t [N_COLS];
    for (int r = 0; r < N_ROWS; r++) begin
      for (int c = 0; c < N_COLS; c++) t[c] = val[r*N_COLS + c];
      for (int w = N_COLS / 2; w >= 1; w = w / 2) begin
        for (int c = 0; c < w; c++) t[c] = fp32_add(t[2*c], t[2*c+1]);
      end
      rs[r] = t[0];
    end
  end

  // Line sum: pairwise tree over the row sums.
  always_comb begin
    fp32_t u [N_ROWS];
    for (int r = 0; r < N_ROWS; r++) u[r] = rs[r];
    for (int w = N_ROWS / 2; w >= 1; w = w / 2) begin
      for (int r = 0; r < w; r++) u[r] = fp32_add(u[2*r], u[2*r+1]);
    end
    lsum = u[0];
  end

  // Max / argmax over enabled lanes, lowest index wins ties.
  always_comb begin
    fp32_t         mv [N];
    logic [IW-1:0] mi [N];
    logic          ma [N];
    for (int i = 0; i < N; i++) begin
      mv[i] = val[i];
      mi[i] = IW'(i);
      ma[i] = en_q[i];
    end
    for (int w = N / 2; w >= 1; w = w / 2) begin
      for (int i = 0; i < w; i++) begin
        // right operand replaces left only if it is valid and strictly larger
        if (ma[2*i+1] && (!ma[2*i] || fp32_lt(mv[2*i], mv[2*i+1]))) begin
          mv[i] = mv[2*i+1];
          mi[i] = mi[2*i+1];
        end else begin
          mv[i] = mv[2*i];
          mi[i] = mi[2*i];
        end
        ma[i] = ma[2*i] || ma[2*i+1];
      end
    end
    mx_v   = mv[0];
    mx_i   = mi[0];
    mx_any = ma[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out2_valid  <= 1'b0;
      out2_tag    <= '0;
      line_sum    <= FP32_ZERO;
      line_max    <= FP32_ZERO;
      line_argmax <= '0;
      line_any    <= 1'b0;
      for (int r = 0; r < N_ROWS; r++) row_sum[r] <= FP32_ZERO;
    end else begin
      out2_valid <= out1_valid;
      if (out1_valid) begin
        out2_tag    <= out1_tag;
        line_sum    <= lsum;
        line_max    <= mx_v;
        line_argmax <= mx_i;
        line_any    <= mx_any;
        for (int r = 0; r < N_ROWS; r++) row_sum[r] <= rs[r];
      end
    end
  end

endmodule
