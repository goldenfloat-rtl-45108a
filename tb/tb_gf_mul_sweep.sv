// tb_gf_mul_sweep -- the multiplier audit at the sizes the GoldenFloat
// multiplier portfolio is swept with: every GF8 operand pair (65,536, a
// superset of the 26,360-point GF8 sweep), then random pairs in the
// quoted counts: GF12 109,576, GF16 262,144, GF20 100,000, GF24 100,000,
// GF32 200,000, and directed exact cases (1.0 x 1.0, 1.5 x 1.5, ...) plus
// 1,000 random pairs at GF64, GF128 and GF256. Each rung's checker adds a
// quarter as many near-equal operand pairs on top. Every product is
// compared with the exact-arithmetic reference gf_ref_model.
module tb_gf_mul_sweep;
  localparam int NR = 9;
  localparam int W [NR]      = '{8, 12, 16, 20, 24, 32, 64, 128, 256};
  localparam int COUNT [NR]  = '{0, 109576, 262144, 100000, 100000, 200000, 1000, 1000, 1000};
  int   chk  [NR];
  int   fail [NR];
  logic dn   [NR];
  int   checks, failures;

  for (genvar r = 0; r < NR; r++) begin : g_r
    gf_arith_checker #(.N(W[r]), .IS_MUL(1'b1), .NTESTS(COUNT[r]), .EXHAUSTIVE(r == 0))
      u_chk (.checks(chk[r]), .failures(fail[r]), .done(dn[r]));
  end

  function automatic bit all_done();
    for (int i = 0; i < NR; i++) if (!dn[i]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    #2;
    while (!all_done()) #100;
    checks = 0;
    failures = 0;
    for (int i = 0; i < NR; i++) begin
      checks += chk[i];
      failures += fail[i];
      $display("GF%0d: %0d checks, %0d failures", W[i], chk[i], fail[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
