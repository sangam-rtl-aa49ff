// systolic_array -- DIM x DIM input-stationary FP16 systolic array (DIM = 8).
//
// One array sits on each DRAM bank. An 8x8 tile X of the input matrix
// (M rows by K columns) is preloaded, one row per cycle, so that PE(r,c)
// holds X[r][c]. The bank then streams the weight tile one column per cycle:
// a 128-bit bank read carries W[0..7][n], the eight K-values of output
// column n. Weight W[c][n] enters column c from the top and moves down one
// row per cycle, so each weight is reused by all M rows; partial sums move
// right along each row, so row r accumulates sum_c X[r][c]*W[c][n] in the
// order c = 0,1,...,7. The array emits one output column C[0..7][n] per
// cycle, in step with the bank: one 128-bit column per tCCD.
//
// The input-stationary dataflow, the 8x8 size, the 128-bit bank feed and the
// MAC pipeline depths are the paper's. The placement of X (one row per PE row),
// the input skew (column c delayed c cycles) and output deskew registers,
// and the gating of all registers when nothing is in flight are this
// design's choices.
//
// Timing: w_valid/w_col in cycle t gives out_valid/out in cycle t + LATENCY,
// LATENCY = 2*DIM + 1 (= 17): DIM-1 skew, DIM-1 rows, 2+1 MAC stages, deskew
// back to the common edge. Load a new tile only when no column is in flight.
module systolic_array
  import sangam_pkg::*;
#(
  parameter int unsigned DIM = SA_DIM
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // input tile preload: row load_row of X
  input  logic                   load_en,
  input  logic [$clog2(DIM)-1:0] load_row,
  input  fp16_t                  load_data [DIM],
  // weight stream: one column of the weight tile per cycle
  input  logic                   w_valid,
  input  fp16_t                  w_col [DIM],
  // one column of the output tile per cycle
  output logic                   out_valid,
  output fp16_t                  out [DIM],
  output logic                   busy
);
  localparam int unsigned LATENCY = 2 * DIM + 1;

  logic [LATENCY-1:0] vsr_q;
  logic               en;

  assign en        = w_valid || (|vsr_q);
  assign busy      = |vsr_q;
  assign out_valid = vsr_q[LATENCY-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  vsr_q <= '0;
    else if (en) vsr_q <= {vsr_q[LATENCY-2:0], w_valid};
  end

  // weights and partial sums between PEs
  fp16_t w_net    [DIM+1][DIM];   // w_net[r][c] enters PE(r,c) from above
  fp16_t psum_net [DIM][DIM+1];   // psum_net[r][c] enters PE(r,c) from the left

  // input skew: column c delayed by c cycles
  for (genvar c = 0; c < DIM; c++) begin : g_skew
    if (c == 0) begin : g_direct
      assign w_net[0][0] = w_col[0];
    end else begin : g_delay
      fp16_t sk_q [c];
      always_ff @(posedge clk) begin
        if (en) begin
          sk_q[0] <= w_col[c];
          for (int i = 1; i < c; i++) sk_q[i] <= sk_q[i-1];
        end
      end
      assign w_net[0][c] = sk_q[c-1];
    end
  end

  for (genvar r = 0; r < DIM; r++) begin : g_row
    assign psum_net[r][0] = 16'h0000;
    for (genvar c = 0; c < DIM; c++) begin : g_col
      sa_pe u_pe (
        .clk      (clk),
        .en       (en),
        .load_x   (load_en && (load_row == r)),
        .x_in     (load_data[c]),
        .w_in     (w_net[r][c]),
        .psum_in  (psum_net[r][c]),
        .w_out    (w_net[r+1][c]),
        .psum_out (psum_net[r][c+1])
      );
    end
  end

  // output deskew: row r delayed by DIM-1-r cycles
  for (genvar r = 0; r < DIM; r++) begin : g_deskew
    if (r == DIM - 1) begin : g_direct
      assign out[r] = psum_net[r][DIM];
    end else begin : g_delay
      fp16_t dk_q [DIM-1-r];
      always_ff @(posedge clk) begin
        if (en) begin
          dk_q[0] <= psum_net[r][DIM];
          for (int i = 1; i < DIM - 1 - r; i++) dk_q[i] <= dk_q[i-1];
        end
      end
      assign out[r] = dk_q[DIM-2-r];
    end
  end
endmodule
