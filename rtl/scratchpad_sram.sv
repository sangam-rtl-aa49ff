// scratchpad_sram -- 256 KiB on-chip SRAM scratchpad of the logic chiplet.
//
// Holds partial-sum output matrices, activations to be loaded into the
// systolic arrays, vector operands and softmax intermediates. It is organised
// as DEPTH words of WIDTH bits; one word is eight FP16 values, the width of
// one adder-tree output beat and of one bank read. It has one synchronous
// read port and one write port so that the accumulate path can read an old
// partial sum and write a new one in the same cycle. Capacity is the
// paper's; the word width, the two ports and the read-old-data behaviour
// when both ports use one address are this design's choices. In silicon this
// is an SRAM macro; here it is a plain array that synthesis maps to memory.
//
// Timing: rd_en/rd_addr in cycle t give rd_data in t+1; wr_en/wr_addr/wr_data
// in cycle t update the word at the clock edge ending t. The contents are not
// reset.
module scratchpad_sram
  import sangam_pkg::*;
#(
  parameter int unsigned WIDTH = BANK_BITS,
  parameter int unsigned DEPTH = SRAM_BYTES * 8 / BANK_BITS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
