// tb_gf_mul -- self-checking testbench of the GF<N> multiplier template at every
// rung of the portfolio (GF4 ... GF256). Each rung gets a gf_arith_checker
// that applies directed cases and random operands and compares the
// multiplier with the exact-arithmetic reference gf_ref_model. The multiplier is
// combinational; the checkers step one operand pair per time unit.
module tb_gf_mul;
  import gf_pkg::*;

  localparam int NW = NUM_WIDTHS;
  int   chk  [NW];
  int   fail [NW];
  logic dn   [NW];
  int   checks, failures;

  for (genvar w = 0; w < NW; w++) begin : g_w
    gf_arith_checker #(.N(WIDTHS[w]), .IS_MUL(1'b1), .NTESTS((WIDTHS[w] <= 32) ? 4000 : 1000))
      u_chk (.checks(chk[w]), .failures(fail[w]), .done(dn[w]));
  end

  function automatic bit all_done();
    for (int i = 0; i < NW; i++) if (!dn[i]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    #2;
    while (!all_done()) #10;
    checks = 0;
    failures = 0;
    for (int i = 0; i < NW; i++) begin
      checks += chk[i];
      failures += fail[i];
      $display("GF%0d: %0d checks, %0d failures", WIDTHS[i], chk[i], fail[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
