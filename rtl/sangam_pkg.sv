// sangam_pkg -- types, constants and FP16 arithmetic shared by the PIM logic
// of one center-stripe logic chiplet.
//
// Every datapath unit in the chiplet (systolic-array MACs, SIMD multiplier,
// adder trees, SIMD adder, max tree) works on IEEE-754 binary16 numbers. The
// arithmetic is written here once, as combinational functions, and the units
// wrap it in their own pipeline registers.
//
// Number handling (a choice of this design; the paper only says "FP16"):
//   * round to nearest, ties to even;
//   * subnormal inputs are read as zero and results below the smallest normal
//     number are flushed to a signed zero;
//   * overflow gives infinity; a NaN input, inf*0 or inf-inf gives the quiet
//     NaN 16'h7E00.
// The multiplier is split into two functions (fp16_mul_s1 / fp16_mul_s2) so
// that fp16_mul can put a register between them, giving the two-stage
// multiplier the paper describes.
//
// Sizes taken from the paper: 32 banks per chip, 128-bit bank interface
// (8 FP16 values), 8x8 systolic arrays, 16-lane SIMD multiplier, eight
// 32-to-1 adder trees, 256 KiB SRAM, 64-to-1 max tree, 32-lane exp unit.
package sangam_pkg;

  typedef logic [15:0] fp16_t;

  localparam int unsigned NUM_BANKS  = 32;   // banks per DRAM chip
  localparam int unsigned BANK_BITS  = 128;  // DDR5 bank interface width
  localparam int unsigned BANK_LANES = BANK_BITS / 16;  // FP16 values per bank read
  localparam int unsigned SA_DIM     = 8;    // systolic array is SA_DIM x SA_DIM
  localparam int unsigned MUL_LANES  = 16;   // SIMD multiplier lanes
  localparam int unsigned EXP_LANES  = 32;   // SIMD exponential lanes
  localparam int unsigned MAX_INPUTS = 64;   // max-reduction tree inputs
  localparam int unsigned SRAM_BYTES = 256 * 1024;

  localparam int unsigned SRAM_WORDS = SRAM_BYTES * 8 / BANK_BITS;
  localparam int unsigned SRAM_AW    = $clog2(SRAM_WORDS);

  // Commands of the chiplet's sequencer (pim_chiplet). The command set is
  // this design's: the paper lists the units but not how they are driven.
  typedef enum logic [2:0] {
    OP_LOAD_TILE = 3'd0,  // SRAM[src..src+7]  -> input tile of bank(s)
    OP_LOAD_VEC  = 3'd1,  // SRAM[src..src+1]  -> multiplier vector of bank(s)
    OP_GEMM      = 3'd2,  // len bank reads through the systolic arrays
    OP_GEMV      = 3'd3,  // len bank reads through the SIMD multipliers
    OP_MAX       = 3'd4,  // running max/argmax over len groups of 64 values
    OP_EXP       = 3'd5,  // e^x over len groups of 32 values, src -> dst
    OP_EWMUL     = 3'd6   // as OP_GEMV, but only bank 'bank' reaches the
                          // adder trees: element-wise product of its reads
  } op_e;

  typedef struct packed {
    op_e                op;
    logic               bcast;  // LOAD_*: load every bank, not only 'bank'
    logic [4:0]         bank;   // LOAD_*: target bank
    logic               acc;    // GEMM/GEMV: add to the partial sums at dst
    logic [SRAM_AW-1:0] src;
    logic [SRAM_AW-1:0] dst;
    logic [15:0]        len;    // bank reads (GEMM/GEMV) or groups (MAX/EXP)
  } cmd_t;

  localparam fp16_t FP16_QNAN = 16'h7E00;
  localparam fp16_t FP16_ONE  = 16'h3C00;

  // Result of the first multiplier stage: sign, biased exponent sum and the
  // 22-bit significand product, plus the special-case decision.
  typedef struct packed {
    logic        sign;
    logic [7:0]  exp;      // two's complement, ea + eb - 15
    logic [21:0] prod;
    logic        is_zero;
    logic        is_inf;
    logic        is_nan;
  } fp16_mul_mid_t;

  function automatic logic fp16_is_nan(fp16_t a);
    return (a[14:10] == 5'h1f) && (a[9:0] != 10'd0);
  endfunction

  function automatic logic fp16_is_inf(fp16_t a);
    return (a[14:10] == 5'h1f) && (a[9:0] == 10'd0);
  endfunction

  // Stage 1: classify operands, add exponents, multiply significands.
  function automatic fp16_mul_mid_t fp16_mul_s1(fp16_t a, fp16_t b);
    fp16_mul_mid_t r;
    logic za, zb, ia, ib;
    za = (a[14:10] == 5'd0);
    zb = (b[14:10] == 5'd0);
    ia = fp16_is_inf(a);
    ib = fp16_is_inf(b);
    r.sign    = a[15] ^ b[15];
    r.exp     = 8'({3'b000, a[14:10]}) + 8'({3'b000, b[14:10]}) - 8'd15;
    r.prod    = 22'({1'b1, a[9:0]}) * 22'({1'b1, b[9:0]});
    r.is_nan  = fp16_is_nan(a) || fp16_is_nan(b) || (ia && zb) || (ib && za);
    r.is_inf  = (ia || ib) && !r.is_nan;
    r.is_zero = (za || zb) && !r.is_nan;
    return r;
  endfunction

  // Stage 2: normalise, round to nearest even, flush / saturate.
  function automatic fp16_t fp16_mul_s2(fp16_mul_mid_t m);
    logic [21:0] p;
    logic [11:0] mant;
    logic        guard, sticky, rnd;
    int          e;
    if (m.is_nan)  return FP16_QNAN;
    if (m.is_inf)  return {m.sign, 5'h1f, 10'd0};
    if (m.is_zero) return {m.sign, 15'd0};
    e = int'($signed(m.exp));
    if (m.prod[21]) begin
      p = m.prod;
      e = e + 1;
    end else begin
      p = m.prod << 1;
    end
    guard  = p[10];
    sticky = |p[9:0];
    rnd    = guard && (sticky || p[11]);
    mant   = {1'b0, p[21:11]} + 12'(rnd);
    if (mant[11]) begin
      mant = mant >> 1;
      e    = e + 1;
    end
    if (e <= 0)  return {m.sign, 15'd0};
    if (e >= 31) return {m.sign, 5'h1f, 10'd0};
    return {m.sign, e[4:0], mant[9:0]};
  endfunction

  function automatic fp16_t fp16_mul_f(fp16_t a, fp16_t b);
    return fp16_mul_s2(fp16_mul_s1(a, b));
  endfunction

  // a + b, rounded once, using guard/round/sticky bits.
  function automatic fp16_t fp16_add_f(fp16_t a, fp16_t b);
    logic        za, zb, sb_, ss_, swap;
    logic [4:0]  eb_, es_;
    logic [13:0] mb_, ms_;           // 1.frac followed by G,R,S
    logic [14:0] sum;
    logic [13:0] sm, v;
    logic [11:0] mant;
    logic        sticky, rnd;
    int          d, e;
    if (fp16_is_nan(a) || fp16_is_nan(b)) return FP16_QNAN;
    if (fp16_is_inf(a) && fp16_is_inf(b))
      return (a[15] == b[15]) ? a : FP16_QNAN;
    if (fp16_is_inf(a)) return a;
    if (fp16_is_inf(b)) return b;
    za = (a[14:10] == 5'd0);
    zb = (b[14:10] == 5'd0);
    if (za && zb) return {a[15] & b[15], 15'd0};
    if (za) return b;
    if (zb) return a;
    swap = (b[14:0] > a[14:0]);
    sb_  = swap ? b[15] : a[15];
    ss_  = swap ? a[15] : b[15];
    eb_  = swap ? b[14:10] : a[14:10];
    es_  = swap ? a[14:10] : b[14:10];
    mb_  = {1'b1, (swap ? b[9:0] : a[9:0]), 3'b000};
    ms_  = {1'b1, (swap ? a[9:0] : b[9:0]), 3'b000};
    d    = int'(eb_) - int'(es_);
    if (d > 13) begin
      sm = 14'd1;                    // only the sticky bit survives
    end else begin
      sm     = ms_ >> d;
      sticky = |(ms_ & ((14'd1 << d) - 14'd1));
      sm[0]  = sm[0] | sticky;
    end
    e = int'(eb_);
    if (sb_ == ss_) begin
      sum = {1'b0, mb_} + {1'b0, sm};
      if (sum[14]) begin
        v = sum[14:1];
        v[0] = v[0] | sum[0];
        e = e + 1;
      end else begin
        v = sum[13:0];
      end
    end else begin
      v = mb_ - sm;
      if (v == 14'd0) return 16'h0000;
      for (int i = 0; i < 13; i++) begin
        if (!v[13]) begin
          v = v << 1;
          e = e - 1;
        end
      end
    end
    rnd  = v[2] && (v[1] || v[0] || v[3]);
    mant = {1'b0, v[13:3]} + 12'(rnd);
    if (mant[11]) begin
      mant = mant >> 1;
      e    = e + 1;
    end
    if (e <= 0)  return {sb_, 15'd0};
    if (e >= 31) return {sb_, 5'h1f, 10'd0};
    return {sb_, e[4:0], mant[9:0]};
  endfunction

  // Total order key for comparing non-NaN FP16 values as unsigned numbers.
  function automatic logic [15:0] fp16_key(fp16_t a);
    return a[15] ? ~a : {1'b1, a[14:0]};
  endfunction

  // a > b (strictly); used by the max-reduction tree.
  function automatic logic fp16_gt(fp16_t a, fp16_t b);
    return fp16_key(a) > fp16_key(b);
  endfunction

endpackage
