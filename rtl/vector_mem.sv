// vector_mem: VMem, the data memory of the SIMD array.
//
// One FP32 bank per SIMD lane (16 lanes x 1024 words = 64 KB by default).  The
// SIMD array reads and writes whole vectors (the same address in every lane);
// the DRAM side moves single words of one lane.  Each bank has one read and one
// write port, so the SIMD port has priority and the DRAM side is held off with
// dram_ready = 0 in the cycles where the SIMD array uses the same kind of
// access (read or write); a DRAM request is only taken when dram_ready is high.
// The paper names VMem and its DRAM link but not its organisation; the banking
// and the arbitration are this design's choices.
// Timing: read data (either port) one cycle after the read is accepted.
module vector_mem #(
  parameter int unsigned NLANE = 16,
  parameter int unsigned BYTES = 65536,
  localparam int unsigned DEPTH = BYTES / (NLANE * 4),
  localparam int unsigned LW    = (NLANE > 1) ? $clog2(NLANE) : 1,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // SIMD side, whole vectors
  input  logic          v_rd_en,
  input  logic [AW-1:0] v_rd_addr,
  output logic [31:0]   v_rd_data [NLANE],
  input  logic          v_wr_en,
  input  logic [AW-1:0] v_wr_addr,
  input  logic [31:0]   v_wr_data [NLANE],
  // DRAM side, single words
  input  logic          dram_wr_en,
  input  logic          dram_rd_en,
  output logic          dram_ready,
  input  logic [LW-1:0] dram_lane,
  input  logic [AW-1:0] dram_addr,
  input  logic [31:0]   dram_wr_data,
  output logic [31:0]   dram_rd_data
);

  logic [31:0] mem [NLANE][DEPTH];
  logic [31:0] q   [NLANE];
  logic [LW-1:0] lane_q;
  logic dwr, drd;

  assign dram_ready = !(dram_wr_en && v_wr_en) && !(dram_rd_en && v_rd_en);
  assign dwr = dram_wr_en && !v_wr_en;
  assign drd = dram_rd_en && !v_rd_en;

  for (genvar l = 0; l < NLANE; l++) begin : g_lane
    always_ff @(posedge clk) begin
      if (v_wr_en)
        mem[l][v_wr_addr] <= v_wr_data[l];
      else if (dwr && dram_lane == LW'(l))
        mem[l][dram_addr] <= dram_wr_data;
      if (v_rd_en)
        q[l] <= mem[l][v_rd_addr];
      else if (drd && dram_lane == LW'(l))
        q[l] <= mem[l][dram_addr];
    end
    assign v_rd_data[l] = q[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   lane_q <= '0;
    else if (drd) lane_q <= dram_lane;
  end
  assign dram_rd_data = q[lane_q];

endmodule
