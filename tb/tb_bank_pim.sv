// tb_bank_pim -- self-checking test of the per-bank PIM unit.
//
// Alternates between the two modes. Systolic-array mode: random input tile,
// a stream of weight columns, each output column checked against the
// reference dot products (fixed order) and the 17-cycle latency. Multiplier
// mode: a random 16-value vector, read pairs streamed back-to-back, the two
// 8-lane product beats checked against the reference products (low beat two
// cycles after the second read, high beat one cycle later). Each mode switch
// happens only after busy has fallen.
module tb_bank_pim;
  import sangam_pkg::*;
  import fp16_ref_pkg::*;

  localparam int DIM = 8;
  logic       clk = 0, rst_n = 0;
  logic       mode, clr, rd_valid, tile_load, vec_load, vec_half;
  logic [2:0] tile_row;
  fp16_t      rd_data [DIM], tile_data [DIM], vec_data [DIM];
  logic       out_valid, busy;
  fp16_t      out [DIM];
  int         checks = 0, failures = 0, cycle = 0;
  fp16_t      qe [$];
  int         qt [$];
  int         sa_beats = 0, mul_beats = 0;

  bank_pim #(.DIM(DIM), .LANES(2 * DIM)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int t;
    t = qt.pop_front();
    checks++;
    if (t != cycle) begin failures++; if (failures < 10) $display("beat at %0d expected %0d", cycle, t); end
    for (int i = 0; i < DIM; i++) begin
      fp16_t e;
      e = qe.pop_front();
      checks++;
      if (out[i] !== e) begin failures++; if (failures < 10) $display("lane %0d got %h exp %h", i, out[i], e); end
    end
    if (mode) mul_beats++; else sa_beats++;
  end

  task automatic idle();
    rd_valid = 0; tile_load = 0; vec_load = 0; clr = 0;
  endtask

  initial begin
    fp16_t X [DIM][DIM];
    fp16_t V [2*DIM];
    fp16_t w [DIM], lo [DIM];
    fp16_t acc;
    foreach (rd_data[i]) begin rd_data[i] = 0; tile_data[i] = 0; vec_data[i] = 0; end
    mode = 0; tile_row = 0; vec_half = 0;
    idle();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      // ---- systolic-array mode ----
      @(negedge clk);
      mode = 0;
      for (int r = 0; r < DIM; r++) begin
        for (int c = 0; c < DIM; c++) X[r][c] = rand_fp16(11, 18);
        tile_load = 1; tile_row = 3'(r); tile_data = X[r];
        @(negedge clk);
      end
      idle();
      for (int n = 0; n < 40; n++) begin
        for (int c = 0; c < DIM; c++) w[c] = rand_fp16(11, 18);
        for (int r = 0; r < DIM; r++) begin
          acc = 16'h0000;
          for (int c = 0; c < DIM; c++) acc = ref_add(acc, ref_mul(X[r][c], w[c]));
          qe.push_back(acc);
        end
        qt.push_back(cycle + 17);
        rd_valid = 1; rd_data = w;
        @(negedge clk);
        rd_valid = 0;
        if (n >= 20) repeat ($urandom % 2) @(negedge clk);
      end
      while (busy) @(negedge clk);
      // ---- multiplier mode ----
      mode = 1;
      for (int i = 0; i < 2 * DIM; i++) V[i] = rand_fp16(5, 25);
      for (int h = 0; h < 2; h++) begin
        vec_load = 1; vec_half = h[0];
        for (int i = 0; i < DIM; i++) vec_data[i] = V[h * DIM + i];
        @(negedge clk);
      end
      idle();
      clr = 1;
      @(negedge clk);
      clr = 0;
      for (int pr = 0; pr < 30; pr++) begin
        for (int i = 0; i < DIM; i++) lo[i] = rand_fp16(5, 25);
        rd_valid = 1; rd_data = lo;
        @(negedge clk);
        for (int i = 0; i < DIM; i++) w[i] = rand_fp16(5, 25);
        rd_valid = 1; rd_data = w;
        for (int i = 0; i < DIM; i++) qe.push_back(ref_mul(lo[i], V[i]));
        for (int i = 0; i < DIM; i++) qe.push_back(ref_mul(w[i], V[DIM + i]));
        qt.push_back(cycle + 2);
        qt.push_back(cycle + 3);
        @(negedge clk);
        rd_valid = 0;
        if (pr >= 15) repeat ($urandom % 3) @(negedge clk);
      end
      while (busy) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    checks += 3;
    if (qt.size() != 0) begin failures++; $display("missing outputs"); end
    if (sa_beats != 160) begin failures++; $display("sa beats %0d", sa_beats); end
    if (mul_beats != 240) begin failures++; $display("mul beats %0d", mul_beats); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
