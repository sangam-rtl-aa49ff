// tb_max_tree -- self-checking test of the 64-to-1 max/argmax tree.
//
// Random input sets (mixed signs, forced ties, all-negative sets) checked
// against a linear scan that keeps the first index of the maximum, with a
// one-cycle latency.
module tb_max_tree;
  import sangam_pkg::*;
  import fp16_ref_pkg::*;

  localparam int N = 64;
  logic       clk = 0, rst_n = 0;
  logic       in_valid, out_valid;
  fp16_t      in [N];
  fp16_t      max_val;
  logic [5:0] max_idx;
  int         checks = 0, failures = 0, cycle = 0;
  fp16_t      qv [$];
  int         qi [$], qt [$];

  max_tree #(.N(N)) dut (.*);

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
    fp16_t ev;
    int    ei;
    ev = qv.pop_front(); ei = qi.pop_front();
    checks += 3;
    if (cycle - qt.pop_front() != 1) begin failures++; $display("latency"); end
    if (max_val !== ev) begin failures++; if (failures < 10) $display("max got %h exp %h", max_val, ev); end
    if (int'(max_idx) != ei) begin failures++; if (failures < 10) $display("idx got %0d exp %0d", max_idx, ei); end
  end

  initial begin
    real best;
    int  bi;
    in_valid = 0;
    foreach (in[i]) in[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      for (int i = 0; i < N; i++) begin
        in[i] = rand_fp16(1, 30);
        if (n % 3 == 1) in[i][15] = 1'b1;           // all negative
        if (n % 3 == 2) in[i] = {1'b0, 5'd15, 6'd0, 4'($urandom)};  // many ties
      end
      bi = 0; best = fp16_to_real(in[0]);
      for (int i = 1; i < N; i++)
        if (fp16_to_real(in[i]) > best) begin best = fp16_to_real(in[i]); bi = i; end
      if (in_valid) begin
        qt.push_back(cycle); qv.push_back(in[bi]); qi.push_back(bi);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (qt.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
