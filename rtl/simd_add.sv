// simd_add -- LANES-wide SIMD FP16 adder (LANES = 8).
//
// Sits after the eight adder trees: each cycle it adds the eight reduced
// outputs (a) to the eight partial sums read back from the SRAM scratchpad
// (b), so that GEMMs whose reduction dimension is longer than one pass of the
// banks accumulate in SRAM. When accumulation is off (acc = 0) it adds +0,
// which passes a unchanged. One lane per adder tree is this design's reading
// of the paper, which does not give the lane count.
//
// Timing: one register stage; in_valid in cycle t gives s and out_valid in
// t+1.
module simd_add
  import sangam_pkg::*;
#(
  parameter int unsigned LANES = BANK_LANES
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  acc,
  input  fp16_t a [LANES],
  input  fp16_t b [LANES],
  output logic  out_valid,
  output fp16_t s [LANES]
);
  logic [LANES-1:0] lane_valid;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    fp16_add u_add (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (in_valid),
      .a         (a[i]),
      .b         (acc ? b[i] : 16'h0000),
      .out_valid (lane_valid[i]),
      .s         (s[i])
    );
  end

  assign out_valid = lane_valid[0];
endmodule
