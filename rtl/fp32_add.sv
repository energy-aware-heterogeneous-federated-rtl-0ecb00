// fp32_add: exact IEEE-754 single-precision adder, round to nearest even.
//
// The paper keeps the accumulating adder of every MAC exact and in FP32 (only
// the mantissa multiplier is approximated), and the SIMD ALUs are FP32 too.
// Structure: order the operands by magnitude, align the smaller one with
// guard/round/sticky bits, add or subtract the 27-bit mantissas, normalise
// (one right shift or a leading-zero left shift), round to nearest even.
// Own choices (not in the paper): subnormal inputs are read as zero and
// subnormal results flushed to zero; exact cancellation gives +0; overflow
// gives infinity; NaN/infinity inputs are not treated specially.
// Interface: combinational, a and b in, y out.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  logic        big_s, sml_s, sub;
  logic [7:0]  big_e, sml_e;
  logic [23:0] big_m, sml_m;
  logic [7:0]  d;
  logic [50:0] shifted;
  logic [26:0] al, bm;
  logic [27:0] sum;
  logic [26:0] norm;
  logic [4:0]  lz;
  logic signed [10:0] e;
  logic [24:0] mr;
  logic        rnd;

  always_comb begin
    // Operand order by magnitude; zero exponent means zero.
    if ({a[30:23], a[22:0]} >= {b[30:23], b[22:0]}) begin
      big_s = a[31]; big_e = a[30:23]; big_m = {a[30:23] != 0, a[22:0]};
      sml_s = b[31]; sml_e = b[30:23]; sml_m = {b[30:23] != 0, b[22:0]};
    end else begin
      big_s = b[31]; big_e = b[30:23]; big_m = {b[30:23] != 0, b[22:0]};
      sml_s = a[31]; sml_e = a[30:23]; sml_m = {a[30:23] != 0, a[22:0]};
    end
    if (sml_e == 8'd0) sml_m = '0;
    sub = big_s ^ sml_s;
    d   = big_e - sml_e;
    // Align: keep 3 extra bits (guard, round, sticky).
    shifted = {sml_m, 27'd0} >> ((d > 8'd51) ? 8'd51 : d);
    al      = {shifted[50:25], |shifted[24:0]};
    bm      = {big_m, 3'b000};
    sum     = sub ? ({1'b0, bm} - {1'b0, al}) : ({1'b0, bm} + {1'b0, al});
    e       = $signed({3'b000, big_e});
    lz      = '0;
    norm    = '0;
    if (sum[27]) begin
      norm = {sum[27:2], sum[1] | sum[0]};
      e    = e + 11'sd1;
    end else begin
      for (int i = 0; i < 27; i++)
        if (sum[i]) lz = 5'(26 - i);
      norm = sum[26:0] << lz;
      e    = e - $signed({6'd0, lz});
    end
    rnd = norm[2] & (norm[1] | norm[0] | norm[3]);
    mr  = {1'b0, norm[26:3]} + 25'(rnd);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end
    if (big_e == 8'd0 || sum == '0)
      y = 32'd0;
    else if (e <= 0)
      y = {big_s, 31'd0};
    else if (e >= 255)
      y = {big_s, 8'hff, 23'd0};
    else
      y = {big_s, e[7:0], mr[22:0]};
  end

endmodule
