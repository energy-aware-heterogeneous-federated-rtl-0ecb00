// sa_controller: sequences one tile operation of the systolic array.
//
// The paper maps the three training steps (forward pass, gradient
// calculation, weight update) onto the same weight-stationary array: a weight
// tile is placed in the PEs, a stream of input vectors (activations, or loss
// gradients in the backward pass) is pushed through, and the reduced partial
// sums are collected in OBuf.  The weight re-ordering that the backward pass
// needs (rotation within a channel, transposition across channels) is done by
// the order in which the tile is written into WBuf.  The controller's command
// (accel_pkg::sa_cmd_t) carries the buffer addresses, the number of input
// vectors and whether to accumulate; its sequencing is this design's choice.
// Sequence: if load_w, stream ROWS weights per column from WBuf into the
// array (w_st_* ports, ROWS cycles of weight shifting); then stream `rows`
// input vectors from IBuf (i_st_* ports), count the output vectors coming out
// of the array and give each its OBuf address o_addr + k; when the last one
// has been written, pulse done.  cmd_ready is high while idle; a command is
// taken on cmd_valid && cmd_ready.
// w_st_count is the constant ROWS (a weight tile is always ROWS values per
// column); it is a port so that the buffer stays one generic module.
// Timing for M input vectors: about ROWS + 3 cycles for the weight load and
// M + ROWS + COLS + 4 for the stream and write-back.
module sa_controller
  import accel_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned WAW  = 10,
  parameter int unsigned IAW  = 10,
  parameter int unsigned OAW  = 10
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cmd_valid,
  input  sa_cmd_t        cmd,
  output logic           cmd_ready,
  output logic           done,
  // WBuf stream control
  output logic           w_st_start,
  output logic [WAW-1:0] w_st_word,
  output logic [15:0]    w_st_count,
  input  logic           w_st_busy,
  // IBuf stream control
  output logic           i_st_start,
  output logic [IAW-1:0] i_st_word,
  output logic [15:0]    i_st_count,
  input  logic           i_st_busy,
  // array output to OBuf
  input  logic           sa_out_valid,
  output logic           ob_row_acc,
  output logic [OAW-1:0] ob_row_addr,
  input  logic           ob_busy
);

  typedef enum logic [2:0] {S_IDLE, S_WSTART, S_WWAIT, S_ISTART, S_IWAIT} state_e;

  state_e   state;
  sa_cmd_t  c;
  logic [15:0] out_cnt;

  assign cmd_ready   = (state == S_IDLE);
  assign w_st_start  = (state == S_WSTART);
  assign w_st_word   = c.w_word[WAW-1:0];
  assign w_st_count  = 16'(ROWS);
  assign i_st_start  = (state == S_ISTART);
  assign i_st_word   = c.i_word[IAW-1:0];
  assign i_st_count  = c.rows;
  assign ob_row_acc  = c.acc;
  assign ob_row_addr = c.o_addr[OAW-1:0] + out_cnt[OAW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      c       <= '0;
      out_cnt <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (sa_out_valid) out_cnt <= out_cnt + 16'd1;
      case (state)
        S_IDLE:   if (cmd_valid) begin
                    c       <= cmd;
                    out_cnt <= '0;
                    state   <= cmd.load_w ? S_WSTART : S_ISTART;
                  end
        S_WSTART: state <= S_WWAIT;
        S_WWAIT:  if (!w_st_busy) state <= S_ISTART;
        S_ISTART: state <= S_IWAIT;
        S_IWAIT:  if (!i_st_busy && out_cnt == c.rows && !sa_out_valid && !ob_busy) begin
                    done  <= 1'b1;
                    state <= S_IDLE;
                  end
        default:  state <= S_IDLE;
      endcase
    end
  end

endmodule
