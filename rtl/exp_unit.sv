// exp_unit -- LANES-wide SIMD FP16 exponential, y = e^x (LANES = 32).
//
// Used by softmax (after the running maximum has been subtracted) and by
// activation functions. The paper gives only the lane count; the method is
// this design's: e^x = 2^(x*log2 e).
//   Stage 1: x is converted to fixed point with 16 fraction bits (inputs of
//            magnitude 32 or more saturate at once: +inf or +0), multiplied by
//            log2(e) = 94548/2^16 and split into an integer part i (floor) and
//            a fraction f in [0,1).
//   Stage 2: 2^f = 1 + f*(C1 + f*(C2 + f*C3)) with C1..C3 = 45576, 14873, 5071
//            (/2^16), a least-squares cubic on [0,1) whose relative error is
//            below 1.3e-4, a quarter of an FP16 ulp; the result is rounded to
//            10 fraction bits and packed with exponent i+15, which flushes to
//            +0 below 2^-14 and saturates to +inf at 2^16.
// A NaN input gives NaN; zero and subnormal inputs give exactly 1.0. The
// result is within two units in the last place of e^x.
//
// Timing: in_valid/x in cycle t give out_valid/y in t+2, one vector per cycle.
module exp_unit
  import sangam_pkg::*;
#(
  parameter int unsigned LANES = EXP_LANES
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp16_t x [LANES],
  output logic  out_valid,
  output fp16_t y [LANES]
);
  localparam logic [17:0] LOG2E = 18'd94548;
  localparam logic [17:0] C1    = 18'd45576;
  localparam logic [17:0] C2    = 18'd14873;
  localparam logic [17:0] C3    = 18'd5071;

  typedef struct packed {
    logic        nan;
    logic        one;     // zero or subnormal input
    logic        big;     // |x| >= 32
    logic        sign;
    logic [8:0]  i;       // integer part of x*log2(e), two's complement
    logic [15:0] f;       // fraction part, /2^16
  } mid_t;

  function automatic mid_t stage1(fp16_t a);
    mid_t        m;
    logic [22:0] mag;       // |a| in fixed point, 16 fraction bits
    logic signed [23:0] xs;
    logic signed [42:0] t;
    int          e;
    m      = '0;
    m.sign = a[15];
    m.nan  = fp16_is_nan(a);
    m.one  = (a[14:10] == 5'd0);
    e      = int'(a[14:10]);
    m.big  = (e >= 20) && !m.nan;
    // |a| = 1.frac * 2^(e-15) = {1,frac} * 2^(e-25); in Q.16 shift by e-9
    if (e >= 9) mag = 23'({1'b1, a[9:0]}) << (e - 9);
    else        mag = 23'({1'b1, a[9:0]}) >> (9 - e);
    xs = a[15] ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
    t  = 43'(xs) * $signed({25'd0, LOG2E});   // Q.32
    m.i = t[40:32];
    m.f = t[31:16];
    return m;
  endfunction

  function automatic fp16_t stage2(mid_t m);
    logic [35:0] p;       // polynomial terms, /2^16 after each step
    logic [17:0] h;
    logic [11:0] mant;
    int          e;
    if (m.nan)  return FP16_QNAN;
    if (m.one)  return FP16_ONE;
    if (m.big)  return m.sign ? 16'h0000 : 16'h7c00;
    p = 36'(C3) * 36'(m.f);
    h = C2 + 18'(p >> 16);
    p = 36'(h) * 36'(m.f);
    h = C1 + 18'(p >> 16);
    p = 36'(h) * 36'(m.f);
    h = 18'h10000 + 18'(p >> 16);             // 2^f in Q1.16, [1,2)
    mant = 12'((h + 18'd32) >> 6);            // round to 10 fraction bits
    e = int'($signed(m.i)) + 15;
    if (mant[11]) begin
      mant = mant >> 1;
      e    = e + 1;
    end
    if (e <= 0)  return 16'h0000;
    if (e >= 31) return 16'h7c00;
    return {1'b0, e[4:0], mant[9:0]};
  endfunction

  mid_t mid_q [LANES];
  logic v1_q;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_ff @(posedge clk) begin
      mid_q[l] <= stage1(x[l]);
      y[l]     <= stage2(mid_q[l]);
    end
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
