// simd_mul -- LANES-wide SIMD FP16 multiplier (LANES = 16).
//
// Each bank has one, next to its systolic array, for GEMV in attention and
// for element-wise products; it is cheaper than running those kernels on the
// array. Lane i multiplies a[i] by b[i] in a two-stage fp16_mul, so every
// lane has the same pipeline as a systolic-array multiplier. The lane count
// is the paper's; using fp16_mul for each lane is this design's choice.
//
// Timing: operands with in_valid in cycle t give p and out_valid in t+2; a
// new operand set may be presented every cycle.
module simd_mul
  import sangam_pkg::*;
#(
  parameter int unsigned LANES = MUL_LANES
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp16_t a [LANES],
  input  fp16_t b [LANES],
  output logic  out_valid,
  output fp16_t p [LANES]
);
  logic [LANES-1:0] lane_valid;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    fp16_mul u_mul (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (in_valid),
      .a         (a[i]),
      .b         (b[i]),
      .out_valid (lane_valid[i]),
      .p         (p[i])
    );
  end

  assign out_valid = lane_valid[0];
endmodule
