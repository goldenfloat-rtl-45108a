// gf_add -- GoldenFloat GF<N> adder, one template for every rung.
//
// Computes a + b for two GF<N> words (widths from the ladder rule in
// gf_pkg) and rounds the exact sum half-up on the magnitude, the rounding
// the paper gives for its multiplier template. The paper names an adder
// per rung and reports a normalisation defect at GF8/GF12 (0.25 + 0.25
// read as 0) but does not give its insides, so this is a plain
// single-path floating-point adder of this design's own making:
//   1. order the operands so that |x| >= |y|;
//   2. shift y's significand right by the exponent difference, keeping a
//      guard, a round and a sticky bit (3 bits below the LSB);
//   3. add or subtract the significands (one carry bit on top);
//   4. normalise: shift right by one on a carry, else left by the leading
//      zero count, adjusting the exponent;
//   5. round half-up on the first bit below the LSB, with the carry-out
//      bumping the exponent, then saturate to infinity past the top and
//      flush to signed zero below the smallest normal.
// An exact zero sum of opposite-signed operands is +0; -0 + -0 is -0.
// Special cases follow gf_pkg: zero/subnormal inputs are zero, inf - inf
// and NaN inputs give the canonical NaN.
//
// Interface: a, b in, y and flags out. Purely combinational, no clock.
// Lint reports the top two bits of the normalised significand `nrm` as
// unused: after normalisation they are the always-zero carry position and
// the hidden one, which the packed result drops.
module gf_add
  import gf_pkg::*;
#(
  parameter int N = 16
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] y,
  output gf_flags_t    flags
);
  localparam int E  = gf_exp_bits(N);
  localparam int M  = gf_frac_bits(N);
  localparam int XW = E + 2;          // signed exponent arithmetic
  localparam int SW = M + 5;          // carry, hidden one, M fraction, G, R, S
  localparam int LW = $clog2(SW + 1);

  localparam logic [E-1:0]  EXP_MAX = '1;
  localparam logic [XW-1:0] EMAXX   = XW'(EXP_MAX);

  logic          sa, sb, sx, sy_in, sr;
  logic [E-1:0]  ea, eb, ex, ey;
  logic [M-1:0]  fa, fb;
  logic          za, zb, ia, ib, na, nb;
  logic          a_ge_b, sub;

  logic [E-1:0]  d;
  logic [SW-1:0] mx, my, my_sh, sum;
  logic          stk;
  logic [LW-1:0] lzc;
  logic          found;
  logic [SW-1:0] nrm;
  logic [XW-1:0] exp_n, exp_r;
  logic [M:0]    frac_r;
  logic          rbit;

  always_comb begin
    sa = a[N-1];  ea = a[N-2 -: E];  fa = a[M-1:0];
    sb = b[N-1];  eb = b[N-2 -: E];  fb = b[M-1:0];
    za = (ea == '0);  zb = (eb == '0);
    ia = (ea == EXP_MAX) && (fa == '0);
    ib = (eb == EXP_MAX) && (fb == '0);
    na = (ea == EXP_MAX) && (fa != '0);
    nb = (eb == EXP_MAX) && (fb != '0);

    // 1. order by magnitude
    a_ge_b = {ea, fa} >= {eb, fb};
    if (a_ge_b) begin
      sx = sa; ex = ea; mx = {2'b01, fa, 3'b000};
      sy_in = sb; ey = eb; my = {2'b01, fb, 3'b000};
    end else begin
      sx = sb; ex = eb; mx = {2'b01, fb, 3'b000};
      sy_in = sa; ey = ea; my = {2'b01, fa, 3'b000};
    end
    sub = sx ^ sy_in;

    // 2. align with sticky
    d = ex - ey;
    if ((E+8)'(d) >= (E+8)'(SW)) begin
      my_sh = '0;
      stk   = 1'b1;                   // y is nonzero here
    end else begin
      my_sh = my >> d;
      stk   = 1'b0;
      for (int i = 0; i < SW; i++)
        if ((i < int'(d)) && my[i]) stk = 1'b1;
    end
    my_sh[0] = my_sh[0] | stk;

    // 3. add / subtract
    sum = sub ? (mx - my_sh) : (mx + my_sh);

    // 4. normalise: the leading one belongs at bit SW-2
    lzc   = '0;
    found = 1'b0;
    for (int i = SW - 1; i >= 0; i--) begin
      if (!found && sum[i]) begin
        found = 1'b1;
        lzc   = LW'(SW - 1 - i);
      end
    end
    if (sum[SW-1]) begin
      nrm   = {1'b0, sum[SW-1:2], sum[1] | sum[0]};
      exp_n = XW'(ex) + XW'(1);
    end else begin
      nrm   = sum << (lzc - LW'(1));
      exp_n = XW'(ex) - XW'(lzc) + XW'(1);
    end

    // 5. round half-up on the guard bit
    rbit   = nrm[2];
    frac_r = {1'b0, nrm[M+2:3]} + (M+1)'(rbit);
    exp_r  = exp_n + XW'(frac_r[M]);
    sr     = sx;

    flags = '0;
    if (na || nb || (ia && ib && (sa != sb))) begin
      y = {1'b0, EXP_MAX, 1'b1, {(M-1){1'b0}}};
      flags.invalid = 1'b1;
    end else if (ia || ib) begin
      y = {ia ? sa : sb, EXP_MAX, {M{1'b0}}};
    end else if (za && zb) begin
      y = {sa & sb, {(N-1){1'b0}}};
    end else if (zb) begin
      y = a;
    end else if (za) begin
      y = b;
    end else if (!found) begin
      y = '0;                         // exact cancellation
    end else if (!exp_r[XW-1] && (exp_r >= EMAXX)) begin
      y = {sr, EXP_MAX, {M{1'b0}}};
      flags.overflow = 1'b1;
      flags.inexact  = 1'b1;
    end else if (exp_r[XW-1] || (exp_r == '0)) begin
      y = {sr, {(N-1){1'b0}}};
      flags.underflow = 1'b1;
      flags.inexact   = 1'b1;
    end else begin
      y = {sr, exp_r[E-1:0], frac_r[M-1:0]};
      flags.inexact = (nrm[2:0] != '0);
    end
  end
endmodule
