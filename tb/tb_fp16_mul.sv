// tb_fp16_mul -- self-checking test of the two-stage FP16 multiplier.
//
// Streams one random operand pair per cycle (plus hand-picked special
// cases), compares each product with the double-precision reference of
// fp16_ref_pkg, and checks that every result appears exactly two cycles
// after its operands.
module tb_fp16_mul;
  import sangam_pkg::*;
  import fp16_ref_pkg::*;

  localparam int N = 4000;
  logic  clk = 0, rst_n = 0;
  logic  in_valid;
  fp16_t a, b, p;
  logic  out_valid;
  int    checks = 0, failures = 0;
  fp16_t qa[$], qb[$];
  int    qt[$];
  int    cycle = 0;

  fp16_mul dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .p);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(negedge clk) if (rst_n && out_valid) begin
    fp16_t ea, eb, exp_p;
    int    t;
    ea = qa.pop_front(); eb = qb.pop_front(); t = qt.pop_front();
    exp_p = ref_mul(ea, eb);
    checks++;
    if (p !== exp_p) begin
      failures++;
      if (failures < 10) $display("MUL mismatch %h*%h got %h exp %h", ea, eb, p, exp_p);
    end
    checks++;
    if (cycle - t != 2) begin
      failures++;
      $display("latency %0d, expected 2", cycle - t);
    end
  end

  task automatic drive(fp16_t x, fp16_t y);
    @(negedge clk);
    in_valid = 1; a = x; b = y;
    qa.push_back(x); qb.push_back(y); qt.push_back(cycle);
  endtask

  initial begin
    in_valid = 0; a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    drive(16'h3C00, 16'h4000);   // 1 * 2
    drive(16'h3E00, 16'hBE00);   // 1.5 * -1.5
    drive(16'h7BFF, 16'h4000);   // overflow
    drive(16'h0400, 16'h3800);   // underflow to zero
    drive(16'h0000, 16'hC000);   // -0
    for (int i = 0; i < N; i++) drive(rand_fp16(1, 30), rand_fp16(1, 30));
    for (int i = 0; i < N; i++) drive(rand_fp16(8, 22), rand_fp16(8, 22));
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    if (qa.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
