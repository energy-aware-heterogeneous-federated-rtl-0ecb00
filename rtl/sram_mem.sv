// sram_mem: single-bank on-chip SRAM with one write and one read port.
//
// Used as InMem, the instruction memory of the SIMD array, which the paper
// lists among the on-chip buffers (64 KB) and which is filled from DRAM.  With
// 64-bit instructions the default holds 8192 of them.  Reads are synchronous:
// rd_data shows mem[rd_addr] one cycle after rd_en and keeps it until the next
// read.  A read and a write of the same address in one cycle return the old
// word.  Nothing in the array is reset; whoever reads a word must have written
// it first.
module sram_mem #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned BYTES = 65536,
  localparam int unsigned DEPTH = (BYTES * 8) / WIDTH,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
