// adder_tree -- N-to-1 pipelined FP16 adder tree (N = 32).
//
// The chip has eight of these. Tree j adds output lane j of all 32 bank
// units, reducing the partial sums of the K-slices that the banks hold
// (bank-level row-wise partitioning). The tree is log2(N) levels of
// one-stage FP16 adders, pairing neighbours: level 1 adds (0+1), (2+3), ...
// The pairing order and the register after every level are this design's
// choices; the paper gives the size, the count and the one-stage adders.
//
// Timing: inputs with in_valid in cycle t give sum and out_valid in cycle
// t + log2(N); a new input set may arrive every cycle.
module adder_tree
  import sangam_pkg::*;
#(
  parameter int unsigned N = NUM_BANKS
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp16_t in [N],
  output logic  out_valid,
  output fp16_t sum
);
  localparam int unsigned LEVELS = $clog2(N);

  // Heap-ordered nodes: node[1] is the root, node[N+j] is input j and
  // node[i] adds its children node[2i] and node[2i+1].
  fp16_t           node [1:2*N-1];
  logic [LEVELS:0] v;            // v[l]: valid of level l, v[0] = input

  for (genvar j = 0; j < N; j++) begin : g_in
    assign node[N+j] = in[j];
  end

  for (genvar i = 1; i < N; i++) begin : g_add
    always_ff @(posedge clk) begin
      node[i] <= fp16_add_f(node[2*i], node[2*i+1]);
    end
  end

  logic [LEVELS-1:0] v_q;
  assign v = {v_q, in_valid};
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= '0;
    else        v_q <= v[LEVELS-1:0];
  end

  assign sum       = node[1];
  assign out_valid = v[LEVELS];
endmodule
