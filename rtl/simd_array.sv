// simd_array: the 1-D SIMD array, NLANE FP32 ALU cores under one sequencer.
//
// The paper pairs the systolic array with a 1-D array of 16 ALU-based SIMD
// cores that run the non-convolutional and gradient operations; its
// instructions come from InMem and its data from VMem.  The sequencer here
// fetches one 64-bit instruction (accel_pkg::simd_instr_t) from InMem, reads
// the vectors vmem[src_a] and vmem[src_b], applies the operation in all lanes
// at once and writes vmem[dst].  Execution starts at start_pc on a start pulse
// and ends at a HALT instruction, when done pulses for one cycle.
// Timing: FETCH, DECODE, READ-B, EXECUTE - 4 cycles for an arithmetic
// instruction, 2 for a NOP, 2 for the final HALT.  The pipeline-free
// sequencer and the instruction format are this design's choices.
module simd_array
  import accel_pkg::*;
#(
  parameter int unsigned NLANE = 16,
  parameter int unsigned IAW   = 13,
  localparam int unsigned VAW  = VADDR_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [IAW-1:0]  start_pc,
  output logic            busy,
  output logic            done,
  // InMem read port
  output logic            im_rd_en,
  output logic [IAW-1:0]  im_rd_addr,
  input  logic [63:0]     im_rd_data,
  // VMem vector ports
  output logic            v_rd_en,
  output logic [VAW-1:0]  v_rd_addr,
  input  fp32_t           v_rd_data [NLANE],
  output logic            v_wr_en,
  output logic [VAW-1:0]  v_wr_addr,
  output fp32_t           v_wr_data [NLANE]
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DEC, S_RDB, S_EXEC} state_e;

  state_e       state;
  logic [IAW-1:0] pc;
  simd_instr_t  ir, cur;
  fp32_t        a_q [NLANE];
  fp32_t        y   [NLANE];

  assign cur = simd_instr_t'(im_rd_data);

  for (genvar l = 0; l < NLANE; l++) begin : g_lane
    simd_alu u_alu (.op(ir.op), .a(a_q[l]), .b(v_rd_data[l]), .y(y[l]));
  end

  always_comb begin
    im_rd_en   = (state == S_FETCH);
    im_rd_addr = pc;
    v_rd_en    = 1'b0;
    v_rd_addr  = '0;
    v_wr_en    = 1'b0;
    v_wr_addr  = ir.dst;
    v_wr_data  = y;
    case (state)
      S_DEC:  if (cur.op != OP_HALT && cur.op != OP_NOP) begin
                v_rd_en   = 1'b1;
                v_rd_addr = cur.src_a;
              end
      S_RDB:  begin
                v_rd_en   = 1'b1;
                v_rd_addr = ir.src_b;
              end
      S_EXEC: v_wr_en = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc    <= '0;
      ir    <= '0;
      done  <= 1'b0;
      for (int l = 0; l < NLANE; l++) a_q[l] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE:  if (start) begin
                   pc    <= start_pc;
                   state <= S_FETCH;
                 end
        S_FETCH: state <= S_DEC;
        S_DEC:   begin
                   ir <= cur;
                   if (cur.op == OP_HALT) begin
                     done  <= 1'b1;
                     state <= S_IDLE;
                   end else if (cur.op == OP_NOP) begin
                     pc    <= pc + IAW'(1);
                     state <= S_FETCH;
                   end else begin
                     state <= S_RDB;
                   end
                 end
        S_RDB:   begin
                   for (int l = 0; l < NLANE; l++) a_q[l] <= v_rd_data[l];
                   state <= S_EXEC;
                 end
        S_EXEC:  begin
                   pc    <= pc + IAW'(1);
                   state <= S_FETCH;
                 end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
