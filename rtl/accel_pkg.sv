// accel_pkg: types and constants shared by the accelerator blocks.
//
// Holds the FP32 helpers (field extraction, comparison), the buffer
// selector used on the DRAM-side transfer ports, the SIMD instruction
// format and the systolic-array tile command.  The instruction encoding
// and the command layout are this design's own choices; the data formats
// (FP32 and bfloatX = 1 sign, 8 exponent, X-9 mantissa bits) follow the
// accelerator configurations C1-C5.
package accel_pkg;

  typedef logic [31:0] fp32_t;

  // Which on-chip buffer a DRAM transfer addresses.
  typedef enum logic [2:0] {
    BUF_IBUF  = 3'd0,
    BUF_WBUF  = 3'd1,
    BUF_OBUF  = 3'd2,
    BUF_INMEM = 3'd3,
    BUF_VMEM  = 3'd4
  } buf_sel_e;

  // SIMD ALU operations.
  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_ADD  = 4'd1,
    OP_SUB  = 4'd2,
    OP_MUL  = 4'd3,
    OP_MAX  = 4'd4,
    OP_MIN  = 4'd5,
    OP_RELU = 4'd6,
    OP_MOV  = 4'd7,
    OP_HALT = 4'd15
  } simd_op_e;

  localparam int unsigned VADDR_W = 10;   // 1024 FP32 words per VMem lane (64 KB / 16 lanes)

  // One SIMD instruction, 64 bits (one InMem word):
  //   vmem[dst] <= op(vmem[src_a], vmem[src_b]) in every lane.
  typedef struct packed {
    simd_op_e            op;
    logic [VADDR_W-1:0]  dst;
    logic [VADDR_W-1:0]  src_a;
    logic [VADDR_W-1:0]  src_b;
    logic [29:0]         rsvd;
  } simd_instr_t;

  // One systolic-array tile operation: OUT[o_addr + t][j] (+)= sum_r IN[t][r] * W[r][j].
  typedef struct packed {
    logic        load_w;   // shift a new 16x16 weight tile in from WBuf first
    logic [15:0] w_word;   // WBuf word address (per bank) of the weight tile
    logic [15:0] i_word;   // IBuf word address (per bank) of the first input vector
    logic [15:0] rows;     // number of input vectors M streamed through the array
    logic [15:0] o_addr;   // OBuf row address of the first output vector
    logic        acc;      // add to the partial results already in OBuf
  } sa_cmd_t;

  function automatic logic fp32_is_zero(fp32_t a);
    return a[30:23] == 8'd0;
  endfunction

  // a < b for normal FP32 numbers (zeros of either sign compare equal).
  function automatic logic fp32_lt(fp32_t a, fp32_t b);
    logic az, bz;
    az = fp32_is_zero(a);
    bz = fp32_is_zero(b);
    if (az && bz)          return 1'b0;
    if (az)                return !b[31];
    if (bz)                return a[31];
    if (a[31] != b[31])    return a[31];
    if (!a[31])            return a[30:0] < b[30:0];
    return a[30:0] > b[30:0];
  endfunction

endpackage
