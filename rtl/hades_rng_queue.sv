// hades_rng_queue: queue of uniform random numbers for the verification unit.
//
// Algorithm 1 draws r ~ U[0,1) for every draft token it tests and one more
// number for each token it samples. The queue keeps DEPTH such numbers ready
// so that the controller normally finds one waiting. A 32-bit xorshift
// generator (x ^= x<<13; x ^= x>>17; x ^= x<<5) produces one new state per
// cycle while the queue is not full; the upper 24 bits of each new state,
// read as a fraction x/2^24, are converted exactly to fp32 and pushed.
//
// Interface: seed_load (one cycle) restarts the generator from seed (a zero
// seed is replaced by 32'h2545F491, since xorshift would stick at zero) and
// empties the queue. The consumer sees out_valid/out_data and takes the head
// with pop, which is only legal while out_valid is high. A push and a pop in
// the same cycle are both performed. After seed_load the first number is
// available two cycles later.
// Only the name "RNG Queue" comes from the source architecture; the generator,
// the number format and the depth are this design's choices.
module hades_rng_queue
  import hades_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_load,
  input  logic [31:0] seed,
  input  logic        pop,
  output logic        out_valid,
  output fp32_t       out_data,
  output logic [23:0] out_raw      // the same number as a 24-bit fraction
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam logic [31:0] SEED_DEFAULT = 32'h2545_F491;

  logic [31:0]   state, nxt;
  logic [23:0]   q_mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [PW:0]   count;
  logic          push, do_pop;

  always_comb begin
    nxt = state;
    nxt = nxt ^ (nxt << 13);
    nxt = nxt ^ (nxt >> 17);
    nxt = nxt ^ (nxt << 5);
  end

  assign do_pop    = pop && (count != '0);
  assign push      = (int'(count) < DEPTH) || do_pop;
  assign out_valid = (count != '0);
  assign out_raw   = q_mem[rd_ptr];
  assign out_data  = frac24_to_fp32(q_mem[rd_ptr]);

  function automatic logic [PW-1:0] ptr_inc(input logic [PW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= SEED_DEFAULT;
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
      for (int i = 0; i < DEPTH; i++) q_mem[i] <= '0;
    end else if (seed_load) begin
      state  <= (seed == 32'd0) ? SEED_DEFAULT : seed;
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) begin
        q_mem[wr_ptr] <= nxt[31:8];
        state         <= nxt;
        wr_ptr        <= ptr_inc(wr_ptr);
      end
      if (do_pop) rd_ptr <= ptr_inc(rd_ptr);
      count <= count + {{PW{1'b0}}, push} - {{PW{1'b0}}, do_pop};
    end
  end

  // A pop is only meaningful when a number is waiting.
  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n) pop |-> out_valid)
    else $error("rng_queue: pop while empty");

endmodule
