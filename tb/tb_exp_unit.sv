// tb_exp_unit -- self-checking test of the 32-lane FP16 exponential unit.
//
// Sweeps every FP16 input whose exponential is a normal FP16 number (plus
// saturating inputs), 32 per cycle, and compares with $exp in double
// precision: the result must be within 2 units in the last place, or be
// +inf / +0 exactly where e^x overflows / underflows by a clear margin.
// Also checks special inputs and the two-cycle latency.
module tb_exp_unit;
  import sangam_pkg::*;
  import fp16_ref_pkg::*;

  localparam int L = 32;
  logic  clk = 0, rst_n = 0;
  logic  in_valid, out_valid;
  fp16_t x [L], y [L];
  int    checks = 0, failures = 0, cycle = 0;
  fp16_t qx [$];
  int    qt [$];

  exp_unit #(.LANES(L)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic ok(fp16_t xi, fp16_t yi);
    real xr, er, yr, ulp;
    if (fp16_is_nan(xi)) return fp16_is_nan(yi);
    if (xi[14:10] == 5'd0) return yi == 16'h3C00;
    if (fp16_is_inf(xi)) return xi[15] ? (yi == 16'h0000) : (yi == 16'h7C00);
    xr = fp16_to_real(xi);
    er = $exp(xr);
    if (er >= 65600.0) return yi == 16'h7C00;
    if (er < 6.0e-5)   return yi == 16'h0000;
    if (er > 65400.0 || er < 6.2e-5) return 1'b1;       // boundary band
    yr = fp16_to_real(yi);
    ulp = fp16_to_real(real_to_fp16(er)) / 1024.0;
    return (yr - er <= 2.0 * ulp) && (er - yr <= 2.0 * ulp);
  endfunction

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (cycle - qt.pop_front() != 2) begin failures++; $display("latency"); end
    for (int i = 0; i < L; i++) begin
      fp16_t xi;
      xi = qx.pop_front();
      checks++;
      if (!ok(xi, y[i])) begin
        failures++;
        if (failures < 10) $display("exp(%h) = %h", xi, y[i]);
      end
    end
  end

  initial begin
    int v;
    in_valid = 0;
    foreach (x[i]) x[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    v = 0;
    while (v < 65536) begin
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < L; i++) begin
        x[i] = 16'(v + i);
        qx.push_back(x[i]);
      end
      qt.push_back(cycle);
      v += L;
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (qt.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
