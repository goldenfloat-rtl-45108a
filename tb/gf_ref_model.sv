// gf_ref_model -- testbench reference for GF<N> addition and multiplication.
//
// Works on exact values, not on the hardware's datapath: each operand is
// unpacked to (sign, integer significand, power-of-two scale), the exact
// sum or product is formed as a wide integer (a Kulisch-style fixed-point
// sum for addition), and only then rounded to GF<N> by a generic routine
// that searches for the leading one and rounds half-up on the magnitude.
// Special cases are decided first from the operand classes.
// Addition aligns the operands on a common scale, so XW must exceed the
// largest exponent difference the stimulus can produce plus 2M+4 bits.
// Unbiased exponents are carried as longint; stimulus keeps wide rungs to
// exponents within a few thousand of zero.
module gf_ref_model
  import gf_pkg::*;
#(
  parameter int N  = 16,
  parameter int XW = 1200
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] y_add,
  output logic [N-1:0] y_mul
);
  localparam int E = gf_exp_bits(N);
  localparam int M = gf_frac_bits(N);
  localparam logic [E-1:0] BIASV = (E'(1) << (E - 1)) - E'(1);
  localparam logic [N-1:0] QNAN  = {1'b0, {E{1'b1}}, 1'b1, {(M-1){1'b0}}};

  typedef enum {C_ZERO, C_NORM, C_INF, C_NAN} cls_e;

  function automatic cls_e cls(input logic [N-1:0] x);
    logic [E-1:0] ef = x[N-2 -: E];
    if (ef == '0) return C_ZERO;
    if (ef == '1) return (x[M-1:0] == '0) ? C_INF : C_NAN;
    return C_NORM;
  endfunction

  // unbiased exponent of a normal word (difference of two E-bit fields)
  function automatic longint uexp(input logic [N-1:0] x);
    logic [E:0] d;
    d = {1'b0, x[N-2 -: E]} - {1'b0, BIASV};
    return longint'(64'($signed(d)));
  endfunction

  function automatic logic [XW-1:0] sig(input logic [N-1:0] x);
    return XW'({1'b1, x[M-1:0]});
  endfunction

  function automatic logic [N-1:0] inf_of(input logic s);
    return {s, {E{1'b1}}, {M{1'b0}}};
  endfunction

  // round value (-1)^s * X * 2^scale to GF<N>, X > 0
  function automatic logic [N-1:0] round_pack(input logic s, input logic [XW-1:0] X,
                                               input longint scale);
    int p;
    logic [XW-1:0] q;
    longint ue, emax;
    logic [E:0] field;
    p = -1;
    for (int i = 0; i < XW; i++) if (X[i]) p = i;
    if (p > M) begin
      q = (X >> (p - M)) + XW'(X[p - M - 1]);
    end else begin
      q = X << (M - p);
    end
    ue = longint'(p) + scale;
    if (q[M+1]) begin
      q  = q >> 1;
      ue = ue + 1;
    end
    emax = (E >= 62) ? 64'sh3fffffffffffffff : (64'sd1 <<< (E - 1)) - 1;
    if (ue > emax) return inf_of(s);
    if (ue < 1 - emax) return {s, {(N-1){1'b0}}};
    field = {1'b0, BIASV} + (E+1)'(ue);
    return {s, field[E-1:0], q[M-1:0]};
  endfunction

  function automatic logic [N-1:0] ref_mul(input logic [N-1:0] x, input logic [N-1:0] z);
    cls_e cx = cls(x), cz = cls(z);
    logic s = x[N-1] ^ z[N-1];
    if (cx == C_NAN || cz == C_NAN) return QNAN;
    if ((cx == C_INF && cz == C_ZERO) || (cz == C_INF && cx == C_ZERO)) return QNAN;
    if (cx == C_INF || cz == C_INF) return inf_of(s);
    if (cx == C_ZERO || cz == C_ZERO) return {s, {(N-1){1'b0}}};
    return round_pack(s, sig(x) * sig(z), uexp(x) + uexp(z) - 2 * M);
  endfunction

  function automatic logic [N-1:0] ref_add(input logic [N-1:0] x, input logic [N-1:0] z);
    cls_e cx = cls(x), cz = cls(z);
    longint ex, ez, emin;
    logic signed [XW:0] vx, vz, sum;
    logic [XW:0] mag;
    if (cx == C_NAN || cz == C_NAN) return QNAN;
    if (cx == C_INF && cz == C_INF && x[N-1] != z[N-1]) return QNAN;
    if (cx == C_INF) return x;
    if (cz == C_INF) return z;
    if (cx == C_ZERO && cz == C_ZERO) return {x[N-1] & z[N-1], {(N-1){1'b0}}};
    if (cz == C_ZERO) return x;
    if (cx == C_ZERO) return z;
    ex = uexp(x);  ez = uexp(z);
    emin = (ex < ez) ? ex : ez;
    vx = (XW+1)'(sig(x)) << (ex - emin);
    vz = (XW+1)'(sig(z)) << (ez - emin);
    if (x[N-1]) vx = -vx;
    if (z[N-1]) vz = -vz;
    sum = vx + vz;
    if (sum == 0) return '0;
    mag = sum[XW] ? (XW+1)'(-sum) : (XW+1)'(sum);
    return round_pack(sum[XW], mag[XW-1:0], emin - longint'(M));
  endfunction

  always_comb begin
    y_add = ref_add(a, b);
    y_mul = ref_mul(a, b);
  end
endmodule
