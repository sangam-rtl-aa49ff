// fp16_add -- FP16 adder with one pipeline stage.
//
// The paper states that the adders of the MAC units have one pipeline stage;
// this module is that adder and the building block of the adder trees and the
// SIMD adder. The combinational sum (sangam_pkg::fp16_add_f: align, add or
// subtract, normalise, round to nearest even) is registered once.
//
// Interface: a, b and in_valid are sampled every cycle; s and out_valid
// appear one cycle later. Reset clears only the valid bit.
module fp16_add
  import sangam_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp16_t a,
  input  fp16_t b,
  output logic  out_valid,
  output fp16_t s
);
  always_ff @(posedge clk) begin
    s <= fp16_add_f(a, b);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
