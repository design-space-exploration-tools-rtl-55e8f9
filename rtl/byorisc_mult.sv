// byorisc_mult: 32x32 multiplier, 4-cycle pipelined (default, as evaluated) or single-cycle.
//
// Returns the low 32 bits of a*b, which is the same for MUL and MULU. The product is split
// in three 16x16 partial products, as a target with 18x18 hard multipliers would do:
//   a*b mod 2^32 = a_lo*b_lo + ((a_hi*b_lo + a_lo*b_hi) << 16).
// Timing: operands are taken on the cycle start is high (cycle 0); y and valid appear in
// cycle 3, so the operation occupies the execute stage for four cycles. A new operation
// may start every cycle (the unit is fully pipelined).
// Pipeline: cycle 0 operands registered; cycle 1 partial products registered;
// cycle 2 sum registered; cycle 3 output.
// With PIPELINED = 0 (the paper's single-cycle multiplier topology) the product is
// combinational: y and valid follow a, b and start in the same cycle, clk and rst are
// unused.
// The two topologies, the 4-cycle latency and the three partial products follow the
// paper; the split of the work among the stages is this design's.
module byorisc_mult
  import byorisc_pkg::*;
#(
  parameter bit PIPELINED = 1'b1
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  start,
  input  word_t a,
  input  word_t b,
  output word_t y,
  output logic  valid
);
  if (PIPELINED) begin : g_pipe
    word_t       a_q, b_q;
    logic [31:0] pp_ll_q, pp_hl_q, pp_lh_q;
    word_t       sum_q;
    logic [2:0]  v_q;

    always_ff @(posedge clk) begin
      if (rst) v_q <= '0;
      else     v_q <= {v_q[1:0], start};
      a_q     <= a;
      b_q     <= b;
      pp_ll_q <= a_q[15:0]  * b_q[15:0];
      pp_hl_q <= a_q[31:16] * b_q[15:0];
      pp_lh_q <= a_q[15:0]  * b_q[31:16];
      sum_q   <= pp_ll_q + ((pp_hl_q + pp_lh_q) << 16);
    end

    assign y     = sum_q;
    assign valid = v_q[2];
  end else begin : g_single
    assign y     = a * b;
    assign valid = start;
  end
endmodule
