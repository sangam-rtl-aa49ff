// max_tree -- N-to-1 FP16 max-reduction tree with argmax (N = 64).
//
// Used for argmax over logits (token selection) and for the running maximum
// of softmax. log2(N) levels of comparators pick the larger of each pair; an
// index travels with each value so the tree also returns the position of the
// maximum. On a tie the lower index wins. Comparison is on the FP16 total
// order (-0 < +0); NaN inputs are not given a meaning. The size is the
// paper's; the tie rule and the single output register are this design's
// choices.
//
// Timing: in_valid/in in cycle t give out_valid, max_val, max_idx in t+1.
module max_tree
  import sangam_pkg::*;
#(
  parameter int unsigned N = MAX_INPUTS,
  localparam int unsigned IW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  fp16_t         in [N],
  output logic          out_valid,
  output fp16_t         max_val,
  output logic [IW-1:0] max_idx
);
  // Heap-ordered nodes: node 1 is the root, node N+j is input j.
  fp16_t         val [1:2*N-1];
  logic [IW-1:0] idx [1:2*N-1];

  for (genvar j = 0; j < N; j++) begin : g_in
    assign val[N+j] = in[j];
    assign idx[N+j] = IW'(j);
  end

  for (genvar i = 1; i < N; i++) begin : g_cmp
    logic right_wins;
    assign right_wins = fp16_gt(val[2*i+1], val[2*i]);
    assign val[i]     = right_wins ? val[2*i+1] : val[2*i];
    assign idx[i]     = right_wins ? idx[2*i+1] : idx[2*i];
  end

  always_ff @(posedge clk) begin
    max_val <= val[1];
    max_idx <= idx[1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
