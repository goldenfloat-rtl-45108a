// gf_mul -- GoldenFloat GF<N> multiplier, one template for every rung.
//
// The widths come from the ladder rule in gf_pkg (E exponent bits, M
// fraction bits, bias 2^(E-1)-1). The datapath follows the corrected
// generator template: the two (M+1)-bit significands with their hidden ones
// multiply into a product register of width [2M+1:0]; the product lies in
// [2^2M, 2^(2M+2)), so normalisation looks at bit 2M+1, the fraction is
// taken from [2M:M+1] when that bit is set and from [2M-1:M] otherwise, and
// the next lower bit is added for round-half-up, with the carry-out of that
// addition bumping the exponent. Declaring the product two bits narrower is
// the defect that made 1.0 x 1.0 read as 0.5.
//
// Beyond the template, which the paper gives, this module adds the special
// cases of the shared encoding (see gf_pkg): zero or subnormal inputs are
// zero, infinities propagate, 0 x inf and NaN inputs give the canonical
// NaN, a result exponent past the top saturates to infinity and one below
// the smallest normal flushes to signed zero.
//
// Interface: a, b in, y and flags out. Purely combinational, no clock.
module gf_mul
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
  localparam int XW = E + 2;                       // signed exponent arithmetic

  localparam logic [E-1:0]  EXP_MAX = '1;
  localparam logic [XW-1:0] BIAS    = (XW'(1) << (E-1)) - XW'(1);
  localparam logic [XW-1:0] EMAXX   = XW'(EXP_MAX);

  logic          sa, sb, sy;
  logic [E-1:0]  ea, eb;
  logic [M-1:0]  fa, fb;
  logic          za, zb, ia, ib, na, nb;

  logic [M:0]     ma, mb;
  logic [2*M+1:0] prod;
  logic           norm;
  logic [M-1:0]   frac_t;
  logic           rbit, sticky;
  logic [M:0]     frac_r;                         // rounded fraction with carry-out
  logic [XW-1:0]  exp_r;

  always_comb begin
    sa = a[N-1];  ea = a[N-2 -: E];  fa = a[M-1:0];
    sb = b[N-1];  eb = b[N-2 -: E];  fb = b[M-1:0];
    za = (ea == '0);  zb = (eb == '0);
    ia = (ea == EXP_MAX) && (fa == '0);
    ib = (eb == EXP_MAX) && (fb == '0);
    na = (ea == EXP_MAX) && (fa != '0);
    nb = (eb == EXP_MAX) && (fb != '0);
    sy = sa ^ sb;

    ma   = {1'b1, fa};
    mb   = {1'b1, fb};
    prod = (2*M+2)'(ma) * (2*M+2)'(mb);
    norm = prod[2*M+1];
    if (norm) begin
      frac_t = prod[2*M:M+1];
      rbit   = prod[M];
      sticky = (prod[M-1:0] != '0);
    end else begin
      frac_t = prod[2*M-1:M];
      rbit   = prod[M-1];
      sticky = (M >= 2) ? (prod[M-2:0] != '0) : 1'b0;
    end
    frac_r = {1'b0, frac_t} + (M+1)'(rbit);
    exp_r  = XW'(ea) + XW'(eb) - BIAS + XW'(norm) + XW'(frac_r[M]);

    flags = '0;
    if (na || nb || (ia && zb) || (ib && za)) begin
      y = {1'b0, EXP_MAX, 1'b1, {(M-1){1'b0}}};
      flags.invalid = 1'b1;
    end else if (ia || ib) begin
      y = {sy, EXP_MAX, {M{1'b0}}};
    end else if (za || zb) begin
      y = {sy, {(N-1){1'b0}}};
    end else if (!exp_r[XW-1] && (exp_r >= EMAXX)) begin
      y = {sy, EXP_MAX, {M{1'b0}}};
      flags.overflow = 1'b1;
      flags.inexact  = 1'b1;
    end else if (exp_r[XW-1] || (exp_r == '0)) begin
      y = {sy, {(N-1){1'b0}}};
      flags.underflow = 1'b1;
      flags.inexact   = 1'b1;
    end else begin
      y = {sy, exp_r[E-1:0], frac_r[M-1:0]};
      flags.inexact = rbit | sticky;
    end
  end
endmodule
