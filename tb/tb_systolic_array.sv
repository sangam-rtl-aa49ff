// tb_systolic_array -- self-checking test of the 8x8 input-stationary array.
//
// For several random input tiles X it streams random weight columns, first
// back-to-back and then with random gaps, and compares every output column
// with C[r][n] = (((0 + X[r][0]W[0][n]) + X[r][1]W[1][n]) + ...), computed
// with the double-precision reference in the same order. It also checks that
// each output appears exactly 2*DIM+1 cycles after its column and that a
// back-to-back stream comes out one column per cycle.
module tb_systolic_array;
  import sangam_pkg::*;
  import fp16_ref_pkg::*;

  localparam int DIM = 8;
  localparam int LAT = 2 * DIM + 1;

  logic  clk = 0, rst_n = 0;
  logic  load_en, w_valid, out_valid, busy;
  logic [2:0] load_row;
  fp16_t load_data [DIM];
  fp16_t w_col [DIM];
  fp16_t out [DIM];
  int    checks = 0, failures = 0;
  int    cycle = 0;
  fp16_t X [DIM][DIM];
  fp16_t exp_q [$];
  int    t_q [$];
  int    last_out = -10, run = 0, max_run = 0;

  systolic_array #(.DIM(DIM)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  always @(negedge clk) if (rst_n && out_valid) begin
    int t;
    t = t_q.pop_front();
    chk(cycle - t == LAT, $sformatf("latency %0d", cycle - t));
    for (int r = 0; r < DIM; r++) begin
      fp16_t e;
      e = exp_q.pop_front();
      chk(out[r] == e, $sformatf("C[%0d] got %h exp %h", r, out[r], e));
    end
    run = (cycle == last_out + 1) ? run + 1 : 1;
    if (run > max_run) max_run = run;
    last_out = cycle;
  end

  task automatic send_col(int lo, int hi);
    fp16_t w [DIM];
    fp16_t acc;
    for (int c = 0; c < DIM; c++) w[c] = rand_fp16(lo, hi);
    for (int r = 0; r < DIM; r++) begin
      acc = 16'h0000;
      for (int c = 0; c < DIM; c++) acc = ref_add(acc, ref_mul(X[r][c], w[c]));
      exp_q.push_back(acc);
    end
    w_valid = 1; w_col = w;
    t_q.push_back(cycle);
    @(negedge clk);
    w_valid = 0;
  endtask

  initial begin
    load_en = 0; w_valid = 0; load_row = 0;
    foreach (load_data[i]) load_data[i] = 0;
    foreach (w_col[i]) w_col[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 6; tile++) begin
      int lo, hi;
      lo = (tile < 3) ? 12 : 4;
      hi = (tile < 3) ? 18 : 20;
      for (int r = 0; r < DIM; r++) begin
        for (int c = 0; c < DIM; c++) X[r][c] = rand_fp16(lo, hi);
        @(negedge clk);
        load_en = 1; load_row = 3'(r); load_data = X[r];
      end
      @(negedge clk);
      load_en = 0;
      for (int n = 0; n < 64; n++) send_col(lo, hi);
      for (int n = 0; n < 32; n++) begin
        repeat ($urandom % 3) @(negedge clk);
        send_col(lo, hi);
      end
      while (busy || exp_q.size() != 0) @(negedge clk);
    end
    chk(max_run >= 64, $sformatf("longest output run %0d, expected one column per cycle", max_run));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
