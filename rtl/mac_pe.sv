// mac_pe: weight-stationary processing element of the systolic array.
//
// Holds three registers, as in the paper's MAC figure: the input-activation
// register (its output feeds the PE to the right), the stationary weight
// register and the partial-sum register (its output feeds the PE below).
// Every cycle the PE computes psum_out <= psum_in + a_in * w, with the
// multiplier exact or MBM-approximate on compressed bfloatX operands
// (fp_mult) and the adder exact FP32 (fp32_add).
// Weights are loaded by shifting them down the column: while w_load is high,
// w_reg takes w_in (the weight register of the PE above) and passes its old
// value on through w_out.  Loading through a separate vertical shift path is
// this design's choice; the paper only says the weights are mapped to the PEs
// unaltered and stay there.
// Timing: one cycle from a_in/psum_in to a_out/psum_out.  Reset clears all
// registers.
module mac_pe #(
  parameter int unsigned MANT_W = 7,
  parameter bit          APPROX = 1'b1,
  localparam int unsigned CW    = 9 + MANT_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          w_load,
  input  logic [CW-1:0] w_in,
  output logic [CW-1:0] w_out,
  input  logic [CW-1:0] a_in,
  output logic [CW-1:0] a_out,
  input  logic [31:0]   psum_in,
  output logic [31:0]   psum_out
);

  logic [CW-1:0] w_reg, a_reg;
  logic [31:0]   psum_reg, prod, sum;

  fp_mult #(.MANT_W(MANT_W), .APPROX(APPROX)) u_mul (.a(a_in), .b(w_reg), .y(prod));
  fp32_add u_add (.a(psum_in), .b(prod), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_reg    <= '0;
      a_reg    <= '0;
      psum_reg <= '0;
    end else begin
      if (w_load) w_reg <= w_in;
      a_reg    <= a_in;
      psum_reg <= sum;
    end
  end

  assign w_out    = w_reg;
  assign a_out    = a_reg;
  assign psum_out = psum_reg;

endmodule
