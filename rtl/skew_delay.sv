// skew_delay: per-lane delay line that skews or de-skews a vector.
//
// Lane i is delayed by i cycles (REVERSE = 0) or by LANES-1-i cycles
// (REVERSE = 1).  Used in front of the systolic array so that row r sees its
// input r cycles late, and behind it so that the outputs of all columns line
// up again.  A lane with zero delay is a wire.  Reset clears the registers.
module skew_delay #(
  parameter int unsigned LANES   = 16,
  parameter int unsigned W       = 16,
  parameter bit          REVERSE = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d [LANES],
  output logic [W-1:0] q [LANES]
);

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    localparam int unsigned DLY = REVERSE ? (LANES - 1 - i) : i;
    if (DLY == 0) begin : g_wire
      assign q[i] = d[i];
    end else begin : g_dly
      logic [W-1:0] sr [DLY];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < DLY; k++) sr[k] <= '0;
        end else begin
          sr[0] <= d[i];
          for (int k = 1; k < DLY; k++) sr[k] <= sr[k-1];
        end
      end
      assign q[i] = sr[DLY-1];
    end
  end

endmodule
