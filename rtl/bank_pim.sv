// bank_pim -- the compute attached to one DRAM bank: an 8x8 systolic array
// and a 16-lane SIMD multiplier, both fed straight from the bank's 128-bit
// row-buffer interface.
//
// mode selects which unit consumes the bank reads (the other stays idle, as
// if clock-gated):
//   MODE_SA : each read is one weight column for the systolic array; one
//             8-lane output column leaves per read (flat GEMM).
//   MODE_MUL: two consecutive reads (16 values) are multiplied lane by lane
//             with a 16-value vector register loaded beforehand (GEMV in
//             attention, element-wise products). The 16 products leave as two
//             8-lane beats, low lanes first, so the output rate matches the
//             128-bit input rate.
// The pairing of the two units with one bank, their sizes and the direct
// row-buffer connection are the paper's. Gathering two reads for the
// 16-lane multiplier and serialising its products into 8-lane beats is this
// design's reading of it: it makes the 16 lanes rate-matched to the bank
// (16 products per two reads), which also gives the paper's peak SIMD
// figure (8 multiplies per bank per 400 MHz cycle).
//
// clr restarts the pairing of reads (use it at the start of each MUL
// command). Timing: SA output LATENCY = 17 cycles after its read; MUL low
// beat 2 cycles after the second read of a pair, high beat one cycle later.
module bank_pim
  import sangam_pkg::*;
#(
  parameter int unsigned DIM   = SA_DIM,
  parameter int unsigned LANES = MUL_LANES
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   mode,        // 0: systolic array, 1: SIMD multiplier
  input  logic                   clr,
  // bank row-buffer read data
  input  logic                   rd_valid,
  input  fp16_t                  rd_data [DIM],
  // input-tile preload for the systolic array
  input  logic                   tile_load,
  input  logic [$clog2(DIM)-1:0] tile_row,
  input  fp16_t                  tile_data [DIM],
  // vector-register load for the multiplier: half vec_half of 16 values
  input  logic                   vec_load,
  input  logic                   vec_half,
  input  fp16_t                  vec_data [DIM],
  // one 8-lane result beat per cycle
  output logic                   out_valid,
  output fp16_t                  out [DIM],
  output logic                   busy
);
  localparam logic MODE_SA  = 1'b0;
  localparam logic MODE_MUL = 1'b1;

  // ---------------- systolic array ----------------
  logic  sa_out_valid, sa_busy;
  fp16_t sa_out [DIM];

  systolic_array #(.DIM(DIM)) u_sa (
    .clk       (clk),
    .rst_n     (rst_n),
    .load_en   (tile_load),
    .load_row  (tile_row),
    .load_data (tile_data),
    .w_valid   (rd_valid && mode == MODE_SA),
    .w_col     (rd_data),
    .out_valid (sa_out_valid),
    .out       (sa_out),
    .busy      (sa_busy)
  );

  // ---------------- SIMD multiplier ----------------
  fp16_t vec_q  [LANES];
  fp16_t lo_q   [DIM];      // first read of a pair
  logic  half_q;            // 1: first read of the pair held in lo_q
  fp16_t mul_a  [LANES];
  logic  mul_in_valid, mul_out_valid;
  fp16_t mul_p  [LANES];
  fp16_t hi_q   [DIM];      // high products waiting for their beat
  logic  hi_pending_q;
  logic  mul_rd;

  assign mul_rd = rd_valid && mode == MODE_MUL;

  always_ff @(posedge clk) begin
    if (vec_load)
      for (int i = 0; i < DIM; i++) vec_q[vec_half ? DIM + i : i] <= vec_data[i];
    if (mul_rd && !half_q) lo_q <= rd_data;
    if (mul_out_valid)
      for (int i = 0; i < DIM; i++) hi_q[i] <= mul_p[DIM + i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      half_q       <= 1'b0;
      hi_pending_q <= 1'b0;
    end else begin
      if (clr)         half_q <= 1'b0;
      else if (mul_rd) half_q <= !half_q;
      hi_pending_q <= mul_out_valid;
    end
  end

  for (genvar i = 0; i < DIM; i++) begin : g_a
    assign mul_a[i]       = lo_q[i];
    assign mul_a[DIM + i] = rd_data[i];
  end
  assign mul_in_valid = mul_rd && half_q;

  simd_mul #(.LANES(LANES)) u_mul (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (mul_in_valid),
    .a         (mul_a),
    .b         (vec_q),
    .out_valid (mul_out_valid),
    .p         (mul_p)
  );

  // ---------------- output beat ----------------
  always_comb begin
    out_valid = 1'b0;
    out       = sa_out;
    if (sa_out_valid) begin
      out_valid = 1'b1;
    end else if (mul_out_valid) begin
      out_valid = 1'b1;
      for (int i = 0; i < DIM; i++) out[i] = mul_p[i];
    end else if (hi_pending_q) begin
      out_valid = 1'b1;
      out       = hi_q;
    end
  end

  logic [1:0] mul_pipe_q;    // multiplies in flight
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mul_pipe_q <= '0;
    else        mul_pipe_q <= {mul_pipe_q[0], mul_in_valid};
  end

  assign busy = sa_busy || half_q || (|mul_pipe_q) || hi_pending_q;

  // The two units never deliver in the same cycle; a mode change waits for
  // the array and the multiplier to drain.
  a_one_source: assert property (@(posedge clk) disable iff (!rst_n)
    !(sa_out_valid && (mul_out_valid || hi_pending_q)));
endmodule
