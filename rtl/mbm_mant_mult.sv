// mbm_mant_mult: minimally biased approximate (logarithmic) integer multiplier.
//
// Multiplies two N-bit unsigned integers without a multiplier array, using
// Mitchell's linear log/antilog approximation with an error-correction term c:
//   a = 2^k1 (1 + x1), b = 2^k2 (1 + x2), k = leading-one position, x in [0,1)
//   P ~ 2^(k1+k2)   (1 + x1 + x2 + c)    if x1 + x2 <  1
//   P ~ 2^(k1+k2+1) (x1 + x2 + c/2)      if x1 + x2 >= 1
// The hardware is two leading-one detectors, two normalising left shifters
// that give x1 and x2, an adder for x1 + x2, an adder for the correction, and
// a final left shift by k1 + k2 (+1) that undoes the logarithm.
// The two cases and the data path follow the paper's MBM equation and its MAC
// figure. The value of c is not given there (it comes from the original MBM
// work); here c = C_CORR / 2^CFRAC, default 21/256 ~ 0.082 (close to 1/12, the
// mean of the Mitchell error x1*x2 over x1 + x2 < 1), which is this design's
// choice.
//
// Interface: purely combinational.  p is a fixed-point number with FW
// fractional bits (p / 2^FW is the approximate product), so the small
// correction term is not lost when the operands are short floating-point
// mantissas.  p = 0 when either operand is 0.
module mbm_mant_mult #(
  parameter int unsigned N      = 8,
  parameter int unsigned CFRAC  = 8,
  parameter int unsigned C_CORR = 21,
  localparam int unsigned FW    = ((N - 1) > (CFRAC + 1)) ? (N - 1) : (CFRAC + 1),
  localparam int unsigned PW    = 2 * N + FW + 1
) (
  input  logic [N-1:0]  a,
  input  logic [N-1:0]  b,
  output logic [PW-1:0] p
);

  localparam int unsigned KW = $clog2(2 * N + 1);

  function automatic logic [KW-1:0] lead_one(logic [N-1:0] v);
    lead_one = '0;
    for (int i = 0; i < N; i++)
      if (v[i]) lead_one = KW'(i);
  endfunction

  logic [KW-1:0] k1, k2;
  logic [N-1:0]  na, nb;           // operands shifted so the leading one is at bit N-1
  logic [FW-1:0] x1, x2;           // fractional parts (the "characteristic" mantissas)
  logic [FW:0]   s;                // x1 + x2
  logic [FW+2:0] m;                // 1 + x1 + x2 + c   or   x1 + x2 + c/2
  logic [KW-1:0] sh;
  logic [FW-1:0] c_full, c_half;

  always_comb begin
    k1 = lead_one(a);
    k2 = lead_one(b);
    na = a << (KW'(N - 1) - k1);
    nb = b << (KW'(N - 1) - k2);
    x1 = FW'(na[N-2:0]) << (FW - (N - 1));
    x2 = FW'(nb[N-2:0]) << (FW - (N - 1));
    c_full = FW'(C_CORR) << (FW - CFRAC);
    c_half = FW'(C_CORR) << (FW - CFRAC - 1);
    s = {1'b0, x1} + {1'b0, x2};
    if (!s[FW]) begin
      m  = (FW+3)'(1) << FW;
      m  = m + (FW+3)'(s) + (FW+3)'(c_full);
      sh = k1 + k2;
    end else begin
      m  = (FW+3)'(s) + (FW+3)'(c_half);
      sh = k1 + k2 + KW'(1);
    end
    if (a == '0 || b == '0) p = '0;
    else                    p = PW'(m) << sh;
  end

endmodule
