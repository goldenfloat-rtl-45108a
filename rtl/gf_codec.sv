// gf_codec -- GF<N> codec: converts between GoldenFloat GF<N> (GF16 by
// default, the rung the paper builds as an FPGA codec) and IEEE 754
// binary32.
//
// Two independent combinational paths share nothing but the conventions
// of gf_pkg:
//   encode: binary32 word enc_in -> GF<N> word enc_out, rounded half-up;
//           values past the GF range saturate to infinity and values below
//           its smallest normal flush to signed zero; binary32 subnormals
//           are read as zero.
//   decode: GF<N> word dec_in -> binary32 word dec_out. For GF16 (E=6,
//           M=9) every finite value is exact in binary32, so decode never
//           rounds; wider rungs round half-up in the same way.
// The paper names the codec and its clock rate (323 MHz on Artix-7) but
// not its interface; the binary32 counterpart and the flag outputs are this
// design's choice, binary32 being the format the paper's conformance
// oracle converts every on-die format to. Both directions are built from
// gf_reformat. N must give an exponent narrower than 31 bits (N <= 64).
module gf_codec
  import gf_pkg::*;
#(
  parameter int N = 16
) (
  input  logic [31:0]  enc_in,
  output logic [N-1:0] enc_out,
  output gf_flags_t    enc_flags,
  input  logic [N-1:0] dec_in,
  output logic [31:0]  dec_out,
  output gf_flags_t    dec_flags
);
  localparam int E = gf_exp_bits(N);
  localparam int M = gf_frac_bits(N);

  gf_reformat #(.SE(8), .SM(23), .DE(E), .DM(M)) u_enc (
    .x(enc_in), .y(enc_out), .flags(enc_flags)
  );

  gf_reformat #(.SE(E), .SM(M), .DE(8), .DM(23)) u_dec (
    .x(dec_in), .y(dec_out), .flags(dec_flags)
  );
endmodule
