// gf_arith_checker -- drives one GF<N> adder (IS_MUL = 0) or multiplier
// (IS_MUL = 1) with directed and random operands and compares every result
// with gf_ref_model. Counts come out on checks/failures; done rises when
// the run is over.
//
// Stimulus: the paper's directed cases (1.0 x 1.0, 1.5 x 1.5, 0.25 + 0.25
// and friends), then NTESTS random pairs. Rungs with E <= 9 draw the
// exponent field uniformly over all codes, so zeros, infinities, NaNs,
// overflow and underflow all occur; wider rungs keep the unbiased exponent
// within +-RANGE and mix in specials now and then. With EXHAUSTIVE set,
// rungs up to GF12 also get every operand pair.
module gf_arith_checker
  import gf_pkg::*;
#(
  parameter int N      = 16,
  parameter bit IS_MUL = 1'b1,
  parameter int NTESTS = 2000,
  parameter int RANGE  = 200,
  parameter bit EXHAUSTIVE = 1'b0   // also apply every operand pair (N <= 12)
) (
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int E = gf_exp_bits(N);
  localparam int M = gf_frac_bits(N);
  localparam logic [E-1:0] BIASV = (E'(1) << (E - 1)) - E'(1);

  logic [N-1:0] a, b, y_dut, y_add, y_mul, y_ref;
  gf_flags_t    fl;

  if (IS_MUL) begin : g_mul
    gf_mul #(.N(N)) dut (.a(a), .b(b), .y(y_dut), .flags(fl));
  end else begin : g_add
    gf_add #(.N(N)) dut (.a(a), .b(b), .y(y_dut), .flags(fl));
  end

  gf_ref_model #(.N(N), .XW(2 * RANGE + 4 * M + 16 + ((E <= 9) ? (1 << E) : 0)))
    u_ref (.a(a), .b(b), .y_add(y_add), .y_mul(y_mul));
  assign y_ref = IS_MUL ? y_mul : y_add;

  // value (-1)^s * (1 + top fraction bits t / 2^tb) * 2^ue
  function automatic logic [N-1:0] mk(input logic s, input int ue, input logic [7:0] t,
                                      input int nb);
    logic [E:0] field;
    logic [M-1:0] f;
    field = {1'b0, BIASV} + (E+1)'(ue);
    f = M'(t) << (M - nb);
    return {s, field[E-1:0], f};
  endfunction

  function automatic logic [N-1:0] rnd_word();
    logic [N-1:0] w;
    logic [E:0] field;
    int ue, pick;
    w = '0;
    for (int i = 0; i < N; i += 32) w = (w << 32) | N'($urandom);
    pick = int'($urandom_range(0, 15));
    if (E > 9) begin
      ue = int'($urandom_range(0, 2 * RANGE)) - RANGE;
      field = {1'b0, BIASV} + (E+1)'(ue);
      if (pick == 0) field = '0;
      else if (pick == 1) field = {1'b0, {E{1'b1}}};
      w[N-2 -: E] = field[E-1:0];
      if (pick == 2) w[M-1:0] = '0;
    end else if (pick < 2) begin
      w[M-1:0] = '0;                   // exact zeros and infinities
    end
    return w;
  endfunction

  task automatic check_one(input logic [N-1:0] x, input logic [N-1:0] z);
    a = x;
    b = z;
    #1;
    checks++;
    if (y_dut !== y_ref) begin
      failures++;
      if (failures <= 10)
        $display("GF%0d %s mismatch: a=%h b=%h dut=%h ref=%h", N, IS_MUL ? "mul" : "add",
                 x, z, y_dut, y_ref);
    end
  endtask

  initial begin
    checks = 0;
    failures = 0;
    done = 1'b0;
    a = '0;
    b = '0;
    #1;
    if (IS_MUL) begin
      // directed cases from the paper's audit: 1.0x1.0 must stay 1.0
      if (E > 1) begin
        check_one(mk(0, 0, 0, 1), mk(0, 0, 0, 1));
        if (y_dut !== mk(0, 0, 0, 1)) begin
          failures++;
          $display("GF%0d 1.0 x 1.0 = %h", N, y_dut);
        end
        checks++;
        check_one(mk(0, 0, 1, 1), mk(0, 0, 1, 1));     // 1.5 x 1.5 = 2.25
        check_one(mk(1, 1, 1, 1), mk(0, 0, 1, 1));     // -3 x 1.5
        check_one(mk(0, 1, 1, 2), mk(0, 1, 3, 2));     // 2.5 x 3.5
      end
    end else begin
      if (E >= 3) begin
        check_one(mk(0, -2, 0, 1), mk(0, -2, 0, 1));   // 0.25 + 0.25 = 0.5
        if (y_dut !== mk(0, -1, 0, 1)) begin
          failures++;
          $display("GF%0d 0.25 + 0.25 = %h", N, y_dut);
        end
        checks++;
      end
      if (E > 1) begin
        check_one(mk(0, 0, 0, 1), mk(1, 0, 0, 1));     // 1 - 1 = +0
        check_one(mk(0, 0, 1, 1), mk(1, -1, 1, 1));    // 1.5 - 0.75
        check_one(mk(0, 1, 3, 2), mk(0, 0, 1, 1));     // 3.5 + 1.5
      end
    end
    if (EXHAUSTIVE && N <= 12)
      for (int i = 0; i < (1 << N); i++)
        for (int j = 0; j < (1 << N); j++) check_one(N'(i), N'(j));
    for (int i = 0; i < NTESTS; i++) check_one(rnd_word(), rnd_word());
    // operands close in magnitude: cancellation and carry paths
    for (int i = 0; i < NTESTS / 4; i++) begin
      logic [N-1:0] x, z;
      x = rnd_word();
      z = x ^ N'($urandom_range(0, 7));
      if ($urandom_range(0, 1) == 1) z[N-1] = ~z[N-1];
      check_one(x, z);
    end
    done = 1'b1;
  end
endmodule
