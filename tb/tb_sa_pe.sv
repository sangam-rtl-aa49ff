// tb_sa_pe -- self-checking test of one systolic-array processing element.
//
// Loads a random stationary input, then drives a random weight and partial
// sum every cycle. Checks w_out one cycle later and
// psum_out = psum_in(t+2) + x*w_in(t) after the third clock edge, using the
// double-precision reference; also checks that en=0 freezes the outputs.
module tb_sa_pe;
  import sangam_pkg::*;
  import fp16_ref_pkg::*;

  logic  clk = 0;
  logic  en, load_x;
  fp16_t x_in, w_in, psum_in, w_out, psum_out;
  int    checks = 0, failures = 0;
  fp16_t wh [0:4000];
  fp16_t ph [0:4000];

  sa_pe dut (.clk, .en, .load_x, .x_in, .w_in, .psum_in, .w_out, .psum_out);

  always #5 clk = ~clk;

  initial begin
    #100000;
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

  initial begin
    fp16_t x, hold_w, hold_p;
    en = 0; load_x = 0; x_in = 0; w_in = 0; psum_in = 0;
    for (int tile = 0; tile < 4; tile++) begin
      @(negedge clk);
      x = rand_fp16(8, 22);
      load_x = 1; x_in = x; en = 0;
      @(negedge clk);
      load_x = 0; en = 1;
      for (int t = 0; t < 600; t++) begin
        wh[t] = rand_fp16(8, 22);
        ph[t] = rand_fp16(8, 22);
        w_in = wh[t]; psum_in = ph[t];
        @(posedge clk); #1;
        chk(w_out == wh[t], "w_out");
        if (t >= 2)
          chk(psum_out == ref_add(ph[t], ref_mul(x, wh[t-2])),
              $sformatf("psum t=%0d got %h", t, psum_out));
        @(negedge clk);
      end
      // clock gate: outputs must hold
      en = 0;
      hold_w = w_out; hold_p = psum_out;
      w_in = ~w_in;
      repeat (3) @(negedge clk);
      chk(w_out == hold_w && psum_out == hold_p, "en=0 holds state");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
