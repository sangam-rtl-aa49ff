// tb_adder_tree -- self-checking test of the 32-to-1 FP16 adder tree.
//
// Random input sets, one per cycle with random gaps. The reference adds the
// inputs pairwise in the same tree order with the double-precision
// reference adder; each sum must appear log2(32) = 5 cycles after its inputs.
module tb_adder_tree;
  import sangam_pkg::*;
  import fp16_ref_pkg::*;

  localparam int N = 32;
  logic  clk = 0, rst_n = 0;
  logic  in_valid, out_valid;
  fp16_t in [N];
  fp16_t sum;
  int    checks = 0, failures = 0, cycle = 0;
  fp16_t qe [$];
  int    qt [$];

  adder_tree #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp16_t tree_ref(fp16_t v [N]);
    fp16_t t [N];
    int    n;
    t = v;
    n = N;
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++) t[i] = ref_add(t[2*i], t[2*i+1]);
      n = n / 2;
    end
    return t[0];
  endfunction

  always @(negedge clk) if (rst_n && out_valid) begin
    fp16_t e;
    e = qe.pop_front();
    checks += 2;
    if (cycle - qt.pop_front() != 5) begin failures++; $display("latency"); end
    if (sum !== e) begin
      failures++;
      if (failures < 10) $display("sum got %h exp %h", sum, e);
    end
  end

  initial begin
    in_valid = 0;
    foreach (in[i]) in[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid = ($urandom % 5) != 0;
      for (int i = 0; i < N; i++) in[i] = (n < 1000) ? rand_fp16(10, 20) : rand_fp16(14, 15);
      if (in_valid) begin
        qt.push_back(cycle);
        qe.push_back(tree_ref(in));
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (8) @(negedge clk);
    checks++;
    if (qt.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
