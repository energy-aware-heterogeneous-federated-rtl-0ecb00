// compressed_buffer: on-chip SRAM buffer holding data in the compressed
// bfloatX format (used for IBuf and WBuf).
//
// The paper stores inputs and weights with reduced mantissa precision: an FP32
// value keeps its sign, its 8 exponent bits and the MANT_W mantissa MSBs, and
// the remaining mantissa LSBs are truncated.  The SRAM word ("bus") is BUS_W
// bits wide and carries ELEMS = BUS_W / (9 + MANT_W) packed values: 64 bits
// for FP32 (2 values) and bfloat16 (4 values), 60 bits for bfloat12 (5) and
// bfloat10 (6), and the total capacity is BYTES (64 KB in the paper).
// This design splits the buffer into NBANK banks, one per systolic-array row
// (IBuf) or column (WBuf), so the array can be fed one value per bank every
// cycle; the banking and the port layout are its own choices.
//
// Write port (from DRAM): one FP32 value per cycle, addressed by bank, word
// and element within the word; it is compressed on the way in.
// Stream port (to the array): st_start with st_word and st_count streams
// st_count consecutive values of every bank (element 0 of word st_word first),
// one value per bank per cycle on st_data/st_valid (zeros between streams).  A word is read from the
// SRAM only once, when its first element is needed (st_rd_strobe marks these
// reads), so compressed words are moved as whole batches.
// Timing: the first st_valid comes 2 cycles after st_start; st_busy is high
// from the cycle after st_start until the last value has been delivered.  The SRAM itself is
// one write and one read port, read data one cycle after the read.
module compressed_buffer #(
  parameter int unsigned NBANK  = 16,
  parameter int unsigned MANT_W = 7,
  parameter int unsigned BUS_W  = 64,
  parameter int unsigned BYTES  = 65536,
  localparam int unsigned CW    = 9 + MANT_W,
  localparam int unsigned ELEMS = BUS_W / CW,
  localparam int unsigned DEPTH = (BYTES * 8) / (NBANK * BUS_W),
  localparam int unsigned BW    = (NBANK > 1) ? $clog2(NBANK) : 1,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned EW    = (ELEMS > 1) ? $clog2(ELEMS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // DRAM-side write port
  input  logic          wr_en,
  input  logic [BW-1:0] wr_bank,
  input  logic [AW-1:0] wr_word,
  input  logic [EW-1:0] wr_elem,
  input  logic [31:0]   wr_data,
  // stream port towards the systolic array
  input  logic          st_start,
  input  logic [AW-1:0] st_word,
  input  logic [15:0]   st_count,
  output logic          st_busy,
  output logic          st_valid,
  output logic [CW-1:0] st_data [NBANK],
  output logic          st_rd_strobe
);

  typedef logic [ELEMS-1:0][CW-1:0] word_t;

  word_t mem [NBANK][DEPTH];

  // Write: compress (truncate mantissa LSBs) and store one element.
  always_ff @(posedge clk) begin
    if (wr_en && (int'(wr_elem) < int'(ELEMS))) mem[wr_bank][wr_word][wr_elem] <= wr_data[31 -: CW];
  end

  // Stream sequencer.
  logic          run;
  logic [15:0]   left;
  logic [AW-1:0] word_q;
  logic [EW-1:0] elem_q;
  logic          rd_en;
  logic          v_d;
  logic [EW-1:0] elem_d;
  logic          first_d;
  word_t         rd_data [NBANK];
  word_t         hold    [NBANK];

  assign rd_en        = run && (elem_q == '0);
  assign st_rd_strobe = rd_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run    <= 1'b0;
      left   <= '0;
      word_q <= '0;
      elem_q <= '0;
      v_d    <= 1'b0;
      elem_d <= '0;
      first_d <= 1'b0;
    end else begin
      v_d     <= run;
      elem_d  <= elem_q;
      first_d <= rd_en;
      if (st_start && !st_busy) begin
        run    <= (st_count != 0);
        left   <= st_count;
        word_q <= st_word;
        elem_q <= '0;
      end else if (run) begin
        left <= left - 16'd1;
        if (left == 16'd1) run <= 1'b0;
        if (elem_q == EW'(ELEMS - 1)) begin
          elem_q <= '0;
          word_q <= word_q + AW'(1);
        end else begin
          elem_q <= elem_q + EW'(1);
        end
      end
    end
  end

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    always_ff @(posedge clk) begin
      if (rd_en) rd_data[b] <= mem[b][word_q];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)       hold[b] <= '0;
      else if (first_d) hold[b] <= rd_data[b];
    end
    always_comb begin
      st_data[b] = first_d ? rd_data[b][elem_d] : hold[b][elem_d];
      if (!v_d) st_data[b] = '0;
    end
  end

  assign st_valid = v_d;
  assign st_busy  = run | v_d;

endmodule
