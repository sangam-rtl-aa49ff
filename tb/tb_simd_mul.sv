// tb_simd_mul -- self-checking test of the 16-lane SIMD FP16 multiplier.
//
// Drives a random 16-lane operand pair every cycle (with occasional idle
// cycles) and checks all lanes against the double-precision reference and
// the two-cycle latency.
module tb_simd_mul;
  import sangam_pkg::*;
  import fp16_ref_pkg::*;

  localparam int L = 16;
  logic  clk = 0, rst_n = 0;
  logic  in_valid, out_valid;
  fp16_t a [L], b [L], p [L];
  int    checks = 0, failures = 0, cycle = 0;
  fp16_t qe [$];
  int    qt [$];

  simd_mul #(.LANES(L)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (cycle - qt.pop_front() != 2) begin failures++; $display("latency"); end
    for (int i = 0; i < L; i++) begin
      fp16_t e;
      e = qe.pop_front();
      checks++;
      if (p[i] !== e) begin
        failures++;
        if (failures < 10) $display("lane %0d got %h exp %h", i, p[i], e);
      end
    end
  end

  initial begin
    in_valid = 0;
    foreach (a[i]) begin a[i] = 0; b[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      for (int i = 0; i < L; i++) begin
        a[i] = rand_fp16(1, 30);
        b[i] = rand_fp16(1, 30);
      end
      if (in_valid) begin
        qt.push_back(cycle);
        for (int i = 0; i < L; i++) qe.push_back(ref_mul(a[i], b[i]));
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (qt.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
