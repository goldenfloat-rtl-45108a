// gf_dot4 -- four-term GoldenFloat dot product, GF16 by default:
//   y = (a0*b0 + a1*b1) + (a2*b2 + a3*b3)
// Four gf_mul products feed a two-level tree of gf_add adders; every
// operation rounds half-up to GF<N>, so the result is the dot product as
// computed with GF<N> arithmetic, not a fused one. The paper names the GF16
// dot4 kernel and its power-on anchor: (1,2,3,4).(1,2,3,4) = 30, which is
// 0x47C0 in GF16. The tree order and the absence of a wider internal
// accumulator are this design's choices; the paper does not give them.
//
// Interface: a and b are arrays of four GF<N> words, element 0 first.
// y and the OR of all seven units' flags come out. Purely combinational.
module gf_dot4
  import gf_pkg::*;
#(
  parameter int N = 16
) (
  input  logic [3:0][N-1:0] a,
  input  logic [3:0][N-1:0] b,
  output logic [N-1:0]      y,
  output gf_flags_t         flags
);
  logic [3:0][N-1:0] p;
  gf_flags_t [3:0]   pf;
  logic [1:0][N-1:0] s;
  gf_flags_t [1:0]   sf;
  gf_flags_t         yf;

  for (genvar i = 0; i < 4; i++) begin : g_mul
    gf_mul #(.N(N)) u_mul (.a(a[i]), .b(b[i]), .y(p[i]), .flags(pf[i]));
  end

  gf_add #(.N(N)) u_add0 (.a(p[0]), .b(p[1]), .y(s[0]), .flags(sf[0]));
  gf_add #(.N(N)) u_add1 (.a(p[2]), .b(p[3]), .y(s[1]), .flags(sf[1]));
  gf_add #(.N(N)) u_add2 (.a(s[0]), .b(s[1]), .y(y),    .flags(yf));

  assign flags = pf[0] | pf[1] | pf[2] | pf[3] | sf[0] | sf[1] | yf;
endmodule
