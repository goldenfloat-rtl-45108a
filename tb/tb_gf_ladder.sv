// tb_gf_ladder -- the ladder rule across all seventeen rungs of the GF
// family, and the arithmetic templates at the rungs outside the portfolio.
// First gf_pkg::gf_exp_bits / gf_frac_bits are compared, for N = 4 ... 1024,
// with the exponent and fraction widths tabulated for the family
// (e = round((N-1)/phi^2), f = N-1-e). Then the multiplier and the adder
// are built at the rule-extension rungs GF6, GF10, GF14, GF48, GF96, GF512
// and GF1024 and checked with directed and random operands against the
// exact reference, showing the one template covers the whole ladder.
module tb_gf_ladder;
  import gf_pkg::*;

  localparam int NT = 17;
  localparam int TN [NT] = '{4, 8, 12, 16, 20, 24, 32, 64, 256, 6, 10, 14, 48, 96, 128, 512, 1024};
  localparam int TE [NT] = '{1, 3, 4, 6, 7, 9, 12, 24, 97, 2, 3, 5, 18, 36, 49, 195, 391};
  localparam int TF [NT] = '{2, 4, 7, 9, 12, 14, 19, 39, 158, 3, 6, 8, 29, 59, 78, 316, 632};

  localparam int NX = 7;
  localparam int XN [NX] = '{6, 10, 14, 48, 96, 512, 1024};

  int   chk  [2*NX];
  int   fail [2*NX];
  logic dn   [2*NX];
  int   checks, failures;

  for (genvar r = 0; r < NX; r++) begin : g_x
    gf_arith_checker #(.N(XN[r]), .IS_MUL(1'b1), .NTESTS(300))
      u_mul (.checks(chk[2*r]), .failures(fail[2*r]), .done(dn[2*r]));
    gf_arith_checker #(.N(XN[r]), .IS_MUL(1'b0), .NTESTS(300))
      u_add (.checks(chk[2*r+1]), .failures(fail[2*r+1]), .done(dn[2*r+1]));
  end

  function automatic bit all_done();
    for (int i = 0; i < 2 * NX; i++) if (!dn[i]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    checks = 0;
    failures = 0;
    for (int i = 0; i < NT; i++) begin
      checks++;
      if (gf_exp_bits(TN[i]) != TE[i] || gf_frac_bits(TN[i]) != TF[i]) begin
        failures++;
        $display("GF%0d: rule gives e=%0d f=%0d, table e=%0d f=%0d", TN[i],
                 gf_exp_bits(TN[i]), gf_frac_bits(TN[i]), TE[i], TF[i]);
      end
    end
    #2;
    while (!all_done()) #10;
    for (int i = 0; i < 2 * NX; i++) begin
      checks += chk[i];
      failures += fail[i];
      $display("GF%0d %s: %0d checks, %0d failures", XN[i/2], (i % 2 != 0) ? "add" : "mul",
               chk[i], fail[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
