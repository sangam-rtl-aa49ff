// sa_pe -- one processing element of the input-stationary systolic array.
//
// The PE holds one element of the input (activation) tile in x_q, loaded
// while load_x is high. Every enabled cycle it multiplies the weight arriving
// from the PE above by x_q in a two-stage FP16 multiplier, adds the product to
// the partial sum arriving from the PE on its left in a one-stage FP16 adder,
// and passes the weight down (one register) and the new partial sum right
// (the adder's register). Pipeline depths follow the paper (multiplier two
// stages, adder one stage); the direction partial sums travel and the en
// input, which freezes every register as a clock gate would, are this
// design's choices.
//
// Timing: a weight on w_in in cycle t leaves on w_out in t+1; the product it
// forms is added to the psum_in seen in cycle t+2 and leaves on psum_out in
// t+3.
module sa_pe
  import sangam_pkg::*;
(
  input  logic  clk,
  input  logic  en,
  input  logic  load_x,
  input  fp16_t x_in,
  input  fp16_t w_in,
  input  fp16_t psum_in,
  output fp16_t w_out,
  output fp16_t psum_out
);
  fp16_t         x_q;
  fp16_mul_mid_t m1_q;
  fp16_t         prod_q;

  always_ff @(posedge clk) begin
    if (load_x) x_q <= x_in;
    if (en) begin
      w_out    <= w_in;
      m1_q     <= fp16_mul_s1(x_q, w_in);
      prod_q   <= fp16_mul_s2(m1_q);
      psum_out <= fp16_add_f(psum_in, prod_q);
    end
  end
endmodule
