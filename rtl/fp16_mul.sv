// fp16_mul -- pipelined FP16 multiplier, two register stages.
//
// The paper gives the MAC multipliers of the systolic arrays a two-stage
// pipeline; this module is that multiplier and is also the lane of the SIMD
// multiplier. Stage 1 classifies the operands, adds the exponents and forms
// the 22-bit significand product (sangam_pkg::fp16_mul_s1); stage 2
// normalises, rounds to nearest even and flushes or saturates
// (sangam_pkg::fp16_mul_s2). How the work is split between the two stages is
// this design's choice.
//
// Interface: a, b and in_valid are sampled every cycle (no stall); p and
// out_valid appear two cycles later. Reset clears only the valid pipeline.
module fp16_mul
  import sangam_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp16_t a,
  input  fp16_t b,
  output logic  out_valid,
  output fp16_t p
);
  fp16_mul_mid_t mid_q;
  logic          v1_q;

  always_ff @(posedge clk) begin
    mid_q <= fp16_mul_s1(a, b);
    p     <= fp16_mul_s2(mid_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1_q      <= in_valid;
      out_valid <= v1_q;
    end
  end
endmodule
