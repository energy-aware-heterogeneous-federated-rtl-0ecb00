// systolic_array: ROWS x COLS weight-stationary systolic array of MAC PEs.
//
// Computes one output vector per cycle: out[j] = sum_r in[r] * W[r][j], with
// the sum formed top to bottom (row 0 first) in exact FP32.  Input vectors
// arrive unskewed on in_row/in_valid; a skew line delays row r by r cycles,
// the activations then travel right through the PEs' input registers and the
// partial sums travel down through their partial-sum registers (the paper's
// "horizontally broadcast" inputs and "vertically reduced" partial sums).
// The bottom row's partial sums are de-skewed so that a whole output vector
// leaves at once on out_row/out_valid.
// Weight loading: while w_load is high each column shifts down one weight per
// cycle from w_top; after ROWS load cycles the weight pushed first sits in the
// bottom row, i.e. column j must be fed W[ROWS-1][j] first and W[0][j] last.
// Timing: an input vector that enters at cycle T leaves at T + ROWS + COLS - 1;
// throughput one vector per cycle.  Cycles without in_valid feed zeros.
// The 16x16 size follows the paper; skew/de-skew registers and the weight
// shift path are this design's choices.
module systolic_array #(
  parameter int unsigned ROWS   = 16,
  parameter int unsigned COLS   = 16,
  parameter int unsigned MANT_W = 7,
  parameter bit          APPROX = 1'b1,
  localparam int unsigned CW    = 9 + MANT_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          w_load,
  input  logic [CW-1:0] w_top   [COLS],
  input  logic          in_valid,
  input  logic [CW-1:0] in_row  [ROWS],
  output logic          out_valid,
  output logic [31:0]   out_row [COLS]
);

  localparam int unsigned LAT = ROWS + COLS - 1;

  logic [CW-1:0] a_skew [ROWS];
  logic [CW-1:0] a_gated [ROWS];
  logic [CW-1:0] a_h [ROWS][COLS+1];
  logic [CW-1:0] w_v [ROWS+1][COLS];
  logic [31:0]   p_v [ROWS+1][COLS];
  logic [31:0]   bottom [COLS];
  logic [LAT-1:0] vpipe;

  always_comb
    for (int r = 0; r < ROWS; r++) a_gated[r] = in_valid ? in_row[r] : '0;

  skew_delay #(.LANES(ROWS), .W(CW), .REVERSE(1'b0)) u_skew (
    .clk, .rst_n, .d(a_gated), .q(a_skew));

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign a_h[r][0] = a_skew[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      mac_pe #(.MANT_W(MANT_W), .APPROX(APPROX)) u_pe (
        .clk, .rst_n,
        .w_load   (w_load),
        .w_in     (w_v[r][c]),
        .w_out    (w_v[r+1][c]),
        .a_in     (a_h[r][c]),
        .a_out    (a_h[r][c+1]),
        .psum_in  (p_v[r][c]),
        .psum_out (p_v[r+1][c])
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_edge
    assign w_v[0][c]  = w_top[c];
    assign p_v[0][c]  = 32'd0;
    assign bottom[c]  = p_v[ROWS][c];
  end

  skew_delay #(.LANES(COLS), .W(32), .REVERSE(1'b1)) u_deskew (
    .clk, .rst_n, .d(bottom), .q(out_row));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], in_valid};
  end
  assign out_valid = vpipe[LAT-1];

endmodule
