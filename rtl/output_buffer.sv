// output_buffer: OBuf, the FP32 buffer that collects systolic-array outputs.
//
// The paper keeps OBuf in FP32 (only IBuf/WBuf are compressed) and connects it
// both to the array and to DRAM.  It is organised here as NBANK banks of
// 32-bit words, one bank per array column, so a whole output vector is written
// in one cycle; total capacity BYTES (64 KB in the paper, 1024 words per bank).
// Row port (from the array): row_valid writes row_data to address row_addr of
// every bank.  With row_acc set the row is added, with the exact FP32 adder, to
// what that address already holds; this lets a long reduction be split into
// tiles of 16 inputs whose partial results pile up in OBuf.  The accumulate
// path is a two-stage pipeline (read, then add and write), so one row per
// cycle is accepted in either mode, also when a row accumulates onto the row
// written just before it (the new sum is forwarded around the SRAM);
// row_busy is high while a row is in flight.
// DRAM port: single-word writes (e.g. to preload biases or clear partial
// results) and single-word reads, data one cycle after dram_rd_en.
// Own choices: the banking, the accumulate-on-write path, and the rule that
// the array path wins when both sides write in the same cycle (the DRAM side
// is expected to stay off the buffer while an array operation runs).
module output_buffer #(
  parameter int unsigned NBANK = 16,
  parameter int unsigned BYTES = 65536,
  localparam int unsigned DEPTH = BYTES / (NBANK * 4),
  localparam int unsigned BW    = (NBANK > 1) ? $clog2(NBANK) : 1,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // from the systolic array
  input  logic          row_valid,
  input  logic          row_acc,
  input  logic [AW-1:0] row_addr,
  input  logic [31:0]   row_data [NBANK],
  output logic          row_busy,
  // DRAM side
  input  logic          dram_wr_en,
  input  logic [BW-1:0] dram_wr_bank,
  input  logic [AW-1:0] dram_wr_addr,
  input  logic [31:0]   dram_wr_data,
  input  logic          dram_rd_en,
  input  logic [BW-1:0] dram_rd_bank,
  input  logic [AW-1:0] dram_rd_addr,
  output logic [31:0]   dram_rd_data
);

  logic [31:0] mem [NBANK][DEPTH];

  // Stage 1: register the row, start the read of the old contents.
  logic          s1_v, s1_acc;
  logic [AW-1:0] s1_addr;
  logic [31:0]   s1_data [NBANK];
  logic [31:0]   old     [NBANK];
  logic [31:0]   sum     [NBANK];
  logic [31:0]   wr_val  [NBANK];
  logic [31:0]   fwd_val [NBANK];
  logic [31:0]   acc_in  [NBANK];
  logic          fwd;
  logic [BW-1:0] rd_bank_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v    <= 1'b0;
      s1_acc  <= 1'b0;
      s1_addr <= '0;
      fwd     <= 1'b0;
      for (int b = 0; b < NBANK; b++) s1_data[b] <= '0;
      for (int b = 0; b < NBANK; b++) fwd_val[b] <= '0;
    end else begin
      // read-after-write forwarding: the row being written now is the one
      // the next accumulation needs, so the SRAM read would be stale
      fwd     <= row_valid && row_acc && s1_v && (s1_addr == row_addr);
      for (int b = 0; b < NBANK; b++) fwd_val[b] <= wr_val[b];
      s1_v    <= row_valid;
      s1_acc  <= row_acc;
      s1_addr <= row_addr;
      for (int b = 0; b < NBANK; b++) s1_data[b] <= row_data[b];
    end
  end

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    assign acc_in[b] = fwd ? fwd_val[b] : old[b];
    assign wr_val[b] = s1_acc ? sum[b] : s1_data[b];
    fp32_add u_acc (.a(acc_in[b]), .b(s1_data[b]), .y(sum[b]));

    always_ff @(posedge clk) begin
      // one read port: the accumulate path has priority over DRAM reads
      if (row_valid && row_acc)
        old[b] <= mem[b][row_addr];
      else if (dram_rd_en && dram_rd_bank == BW'(b))
        old[b] <= mem[b][dram_rd_addr];
      // one write port: the array path has priority over DRAM writes
      if (s1_v)
        mem[b][s1_addr] <= wr_val[b];
      else if (dram_wr_en && dram_wr_bank == BW'(b))
        mem[b][dram_wr_addr] <= dram_wr_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          rd_bank_q <= '0;
    else if (dram_rd_en) rd_bank_q <= dram_rd_bank;
  end

  assign dram_rd_data = old[rd_bank_q];
  assign row_busy     = s1_v;

endmodule
