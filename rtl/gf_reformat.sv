// gf_reformat -- re-encodes a value from one sign/exponent/fraction format
// into another with the same conventions (IEEE-style bias 2^(E-1)-1,
// hidden one, exponent 0 = zero, all-ones exponent = infinity/NaN).
//
// It is the conversion step that the GF codec uses in both directions
// (GF<N> to IEEE binary32 and back); IEEE binary32 is such a format with
// E=8, M=23, apart from its subnormals, which are read as zero here.
// The value is rebiased; a fraction that narrows is rounded half-up with
// the carry-out bumping the exponent; a fraction that widens is padded
// with zeros. A result exponent past the top gives infinity (overflow) and
// one below the smallest normal gives signed zero (underflow). A NaN input
// gives the destination's canonical quiet NaN {0, all ones, 1, 0...}.
// Exponent arithmetic is done in 32-bit signed integers, so both exponent
// widths must stay below 31 bits.
//
// Interface: x in (SE+SM+1 bits), y out (DE+DM+1 bits) and flags.
// Purely combinational.
module gf_reformat
  import gf_pkg::*;
#(
  parameter int SE = 8,
  parameter int SM = 23,
  parameter int DE = 6,
  parameter int DM = 9
) (
  input  logic [SE+SM:0] x,
  output logic [DE+DM:0] y,
  output gf_flags_t      flags
);
  localparam int SBIAS = (1 << (SE - 1)) - 1;
  localparam int DBIAS = (1 << (DE - 1)) - 1;
  localparam int DEMAX = (1 << DE) - 1;
  localparam int KEEP  = (DM < SM) ? DM : SM;   // fraction bits carried over
  localparam int DROP  = SM - KEEP;             // > 0 only when narrowing

  logic          s;
  logic [SE-1:0] ex;
  logic [SM-1:0] fx;
  logic [DM:0]   frac_r;
  logic          rbit, sticky;
  int            e_out;

  initial assert (SE < 31 && DE < 31)
    else $error("gf_reformat: exponent fields must be narrower than 31 bits");

  always_comb begin
    s  = x[SE+SM];
    ex = x[SE+SM-1 -: SE];
    fx = x[SM-1:0];

    frac_r = '0;
    rbit   = 1'b0;
    sticky = 1'b0;
    if (DROP > 0) begin
      frac_r = (DM+1)'(fx >> DROP);
      rbit   = fx[(DROP > 0) ? DROP - 1 : 0];
      for (int i = 0; i < SM; i++)
        if (i + 1 < DROP && fx[i]) sticky = 1'b1;
      frac_r = frac_r + (DM+1)'(rbit);
    end else begin
      frac_r = (DM+1)'(fx) << ((DM >= SM) ? DM - SM : 0);
    end
    e_out = int'({1'b0, ex}) - SBIAS + DBIAS + int'({1'b0, frac_r[DM]});

    flags = '0;
    if (ex == '1 && fx != '0) begin
      y = {1'b0, {DE{1'b1}}, 1'b1, {(DM-1){1'b0}}};
      flags.invalid = 1'b1;
    end else if (ex == '1) begin
      y = {s, {DE{1'b1}}, {DM{1'b0}}};
    end else if (ex == '0) begin
      y = {s, {(DE+DM){1'b0}}};
    end else if (e_out >= DEMAX) begin
      y = {s, {DE{1'b1}}, {DM{1'b0}}};
      flags.overflow = 1'b1;
      flags.inexact  = 1'b1;
    end else if (e_out <= 0) begin
      y = {s, {(DE+DM){1'b0}}};
      flags.underflow = 1'b1;
      flags.inexact   = 1'b1;
    end else begin
      y = {s, DE'(e_out), frac_r[DM-1:0]};
      flags.inexact = rbit | sticky;
    end
  end
endmodule
