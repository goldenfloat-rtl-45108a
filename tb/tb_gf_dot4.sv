// tb_gf_dot4 -- self-checking testbench of the GF16 four-term dot product.
// Checks the power-on anchor (1,2,3,4).(1,2,3,4) = 30 = 0x47C0, a few
// exact small-integer dot products, and random vectors against a chain of
// exact-arithmetic references (gf_ref_model) that rounds in the same order
// as the specified tree: (a0b0 + a1b1) + (a2b2 + a3b3).
module tb_gf_dot4;
  import gf_pkg::*;

  logic [3:0][15:0] a, b;
  logic [15:0]      y;
  gf_flags_t        fl;
  int               checks, failures;

  gf_dot4 #(.N(16)) dut (.a(a), .b(b), .y(y), .flags(fl));

  // reference chain
  logic [3:0][15:0] p;
  logic [15:0]      s0, s1, yr, unused_add [4], unused_mul [3];
  for (genvar i = 0; i < 4; i++) begin : g_ref
    gf_ref_model #(.N(16), .XW(400)) u_m (.a(a[i]), .b(b[i]), .y_add(unused_add[i]), .y_mul(p[i]));
  end
  gf_ref_model #(.N(16), .XW(400)) u_s0 (.a(p[0]), .b(p[1]), .y_add(s0), .y_mul(unused_mul[0]));
  gf_ref_model #(.N(16), .XW(400)) u_s1 (.a(p[2]), .b(p[3]), .y_add(s1), .y_mul(unused_mul[1]));
  gf_ref_model #(.N(16), .XW(400)) u_s2 (.a(s0), .b(s1), .y_add(yr), .y_mul(unused_mul[2]));

  // small non-negative integer -> GF16 (exact for 0..1023)
  function automatic logic [15:0] int_to_gf16(input int v);
    int e;
    logic [9:0] m;
    if (v == 0) return 16'h0000;
    e = 0;
    while ((v >> e) > 1) e++;
    m = 10'(v << (9 - e));
    return {1'b0, 6'(e + 31), m[8:0]};
  endfunction

  task automatic check(input logic [15:0] want, input string what);
    #1;
    checks++;
    if (y !== want) begin
      failures++;
      if (failures <= 10) $display("%s: got %h want %h", what, y, want);
    end
  endtask

  initial begin
    int va [4], vb [4], dot;
    checks = 0;
    failures = 0;
    // canonical anchor
    for (int i = 0; i < 4; i++) begin
      a[i] = int_to_gf16(i + 1);
      b[i] = int_to_gf16(i + 1);
    end
    check(16'h47c0, "anchor (1,2,3,4).(1,2,3,4)");
    // exact small-integer dot products (all partial results stay below 512)
    for (int t = 0; t < 200; t++) begin
      dot = 0;
      for (int i = 0; i < 4; i++) begin
        va[i] = int'($urandom_range(0, 11));
        vb[i] = int'($urandom_range(0, 11));
        dot += va[i] * vb[i];
        a[i] = int_to_gf16(va[i]);
        b[i] = int_to_gf16(vb[i]);
      end
      check(int_to_gf16(dot), "integer dot product");
    end
    // random GF16 vectors, finite operands in a moderate range
    for (int t = 0; t < 5000; t++) begin
      for (int i = 0; i < 4; i++) begin
        a[i] = 16'($urandom);
        b[i] = 16'($urandom);
        a[i][14:9] = 6'(16 + $urandom_range(0, 30));
        b[i][14:9] = 6'(16 + $urandom_range(0, 30));
      end
      #1;
      check(yr, "random vector");
    end
    // random codes over the whole range, specials included
    for (int t = 0; t < 5000; t++) begin
      for (int i = 0; i < 4; i++) begin
        a[i] = 16'($urandom);
        b[i] = 16'($urandom);
      end
      #1;
      check(yr, "random codes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
