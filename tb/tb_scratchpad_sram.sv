// tb_scratchpad_sram -- self-checking test of the 256 KiB scratchpad.
//
// Writes a pattern derived from the address into every word, reads every
// word back (one-cycle read latency), then runs random simultaneous reads and
// writes against a shadow copy, including reads of the address being written
// in the same cycle (old data expected).
module tb_scratchpad_sram;
  localparam int W = 128, D = 16384, AW = 14;
  logic          clk = 0;
  logic          rd_en, wr_en;
  logic [AW-1:0] rd_addr, wr_addr;
  logic [W-1:0]  rd_data, wr_data;
  logic [W-1:0]  shadow [D];
  int            checks = 0, failures = 0;

  scratchpad_sram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] pat(int a);
    return {4{32'(a * 32'h9E3779B1 + 7)}} ^ {96'd0, 32'(a)};
  endfunction

  initial begin
    logic [W-1:0] e;
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_data = pat(a); shadow[a] = pat(a);
    end
    @(negedge clk); wr_en = 0;
    for (int a = 0; a < D; a++) begin
      rd_en = 1; rd_addr = AW'(a);
      @(posedge clk); #1;
      checks++;
      if (rd_data !== pat(a)) begin
        failures++;
        if (failures < 10) $display("addr %0d got %h", a, rd_data);
      end
      @(negedge clk);
    end
    for (int n = 0; n < 20000; n++) begin
      rd_en = 1; rd_addr = AW'($urandom);
      wr_en = $urandom % 2; wr_addr = ($urandom % 4 == 0) ? rd_addr : AW'($urandom);
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      e = shadow[rd_addr];
      @(posedge clk); #1;
      if (wr_en) shadow[wr_addr] = wr_data;
      checks++;
      if (rd_data !== e) begin
        failures++;
        if (failures < 10) $display("random read %0d got %h exp %h", rd_addr, rd_data, e);
      end
      @(negedge clk);
    end
    // read-enable low holds the last read data
    e = rd_data;
    rd_en = 0; rd_addr = rd_addr + 1;
    @(posedge clk); #1;
    checks++;
    if (rd_data !== e) begin failures++; $display("rd_en=0 changed data"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
