// fp_mult: floating-point multiplier for the compressed bfloatX formats.
//
// Operands are {sign, 8-bit exponent, MANT_W mantissa bits} (bfloat(9+MANT_W);
// MANT_W = 23 is FP32, 7 is bfloat16, 3 is bfloat12, 1 is bfloat10).  The sign
// is the XOR of the signs and the exponents are added exactly.  The mantissa
// product (1.ma)(1.mb) is either exact (APPROX = 0, configurations C1 and C2)
// or taken from the MBM approximate multiplier (APPROX = 1, C3-C5), as in the
// paper: only the mantissa multiplication is approximated, the exponent path
// stays exact.  The product is normalised and returned in FP32 so that it can
// be accumulated by the exact FP32 adder; where the mantissa product has more
// than 23 fraction bits it is rounded to nearest-even.
// Own choices (the paper is silent): a zero exponent is read as zero
// (subnormals flushed), exponent underflow gives a signed zero, overflow gives
// infinity; NaN and infinity operands are not treated specially.
// Interface: combinational, a and b in, y (FP32) out.
module fp_mult #(
  parameter int unsigned MANT_W = 7,
  parameter bit          APPROX = 1'b1,
  parameter int unsigned CFRAC  = 8,
  parameter int unsigned C_CORR = 21,
  localparam int unsigned CW    = 9 + MANT_W
) (
  input  logic [CW-1:0] a,
  input  logic [CW-1:0] b,
  output logic [31:0]   y
);

  localparam int unsigned N  = MANT_W + 1;
  localparam int unsigned FW = ((N - 1) > (CFRAC + 1)) ? (N - 1) : (CFRAC + 1);
  localparam int unsigned PF = APPROX ? (FW + 2 * MANT_W) : (2 * MANT_W);  // fraction bits of pm

  logic [PF+2:0] pm;   // mantissa product in [1, 4+c), PF fraction bits

  if (APPROX) begin : g_mbm
    mbm_mant_mult #(.N(N), .CFRAC(CFRAC), .C_CORR(C_CORR)) u_mbm (
      .a ({1'b1, a[MANT_W-1:0]}),
      .b ({1'b1, b[MANT_W-1:0]}),
      .p (pm)
    );
  end else begin : g_exact
    logic [2*N-1:0] prod;
    assign prod = {1'b1, a[MANT_W-1:0]} * {1'b1, b[MANT_W-1:0]};
    assign pm   = {1'b0, prod};
  end

  logic [1:0]       sh;
  logic [PF+4:0]    pe;
  logic [PF+26:0]   ext;
  logic [22:0]      mant;
  logic             guard, sticky, rnd;
  logic [23:0]      mant_r;
  logic signed [10:0] e;

  always_comb begin
    sh     = pm[PF+2] ? 2'd2 : (pm[PF+1] ? 2'd1 : 2'd0);
    pe     = {pm, 2'b00} >> sh;              // pe[PF+2] is the leading one
    ext    = {pe[PF+1:0], 25'd0};
    mant   = ext[PF+26 -: 23];
    guard  = ext[PF+3];
    sticky = |ext[PF+2:0];
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + 24'(rnd);
    e      = $signed({3'b000, a[CW-2 -: 8]}) + $signed({3'b000, b[CW-2 -: 8]})
             - 11'sd127 + $signed({9'd0, sh}) + $signed({10'd0, mant_r[23]});
    y[31]  = a[CW-1] ^ b[CW-1];
    if (a[CW-2 -: 8] == 8'd0 || b[CW-2 -: 8] == 8'd0 || e <= 0)
      y[30:0] = '0;
    else if (e >= 255)
      y[30:0] = {8'hff, 23'd0};
    else
      y[30:0] = {e[7:0], mant_r[22:0]};
  end

endmodule
