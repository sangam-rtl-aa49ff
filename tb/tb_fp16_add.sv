// tb_fp16_add -- self-checking test of the one-stage FP16 adder.
//
// Random operands over the whole normal range and over a narrow range
// (where cancellation and rounding ties are frequent), compared with the
// double-precision reference; every sum must appear one cycle after its
// operands.
module tb_fp16_add;
  import sangam_pkg::*;
  import fp16_ref_pkg::*;

  localparam int N = 4000;
  logic  clk = 0, rst_n = 0;
  logic  in_valid;
  fp16_t a, b, s;
  logic  out_valid;
  int    checks = 0, failures = 0;
  fp16_t qa[$], qb[$];
  int    qt[$];
  int    cycle = 0;

  fp16_add dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .s);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    #300000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    fp16_t ea, eb, exp_s;
    int    t;
    ea = qa.pop_front(); eb = qb.pop_front(); t = qt.pop_front();
    exp_s = ref_add(ea, eb);
    checks++;
    if (s !== exp_s) begin
      failures++;
      if (failures < 10) $display("ADD mismatch %h+%h got %h exp %h", ea, eb, s, exp_s);
    end
    checks++;
    if (cycle - t != 1) begin
      failures++;
      $display("latency %0d, expected 1", cycle - t);
    end
  end

  task automatic drive(fp16_t x, fp16_t y);
    @(negedge clk);
    in_valid = 1; a = x; b = y;
    qa.push_back(x); qb.push_back(y); qt.push_back(cycle);
  endtask

  initial begin
    fp16_t x;
    in_valid = 0; a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    drive(16'h3C00, 16'h3C00);   // 1 + 1
    drive(16'h3C00, 16'hBC00);   // 1 - 1 = +0
    drive(16'h7BFF, 16'h7BFF);   // overflow
    drive(16'h3C00, 16'h1000);   // far smaller addend
    drive(16'h3C01, 16'hBC00);   // cancellation
    for (int i = 0; i < N; i++) drive(rand_fp16(1, 30), rand_fp16(1, 30));
    for (int i = 0; i < N; i++) drive(rand_fp16(13, 16), rand_fp16(13, 16));
    for (int i = 0; i < N; i++) begin
      x = rand_fp16(10, 20);
      drive(x, {~x[15], x[14:10], 10'($urandom % 4) ^ x[9:0]});
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    if (qa.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
