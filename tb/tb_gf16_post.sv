// tb_gf16_post -- self-checking testbench of the GF16 power-on self-test.
// The controller is connected to a real gf_dot4 through a corruption
// switch, so the test sees either the true dot4 result or that result with
// one bit flipped. Checks:
//   * after reset, busy is high for exactly the first cycle and the anchor
//     operands are the GF16 words of 1, 2, 3, 4 (built independently here);
//   * the true datapath gives done = 1, pass = 1 one cycle after reset;
//   * a start pulse re-runs the test in one busy cycle; with the result
//     corrupted (each of the 16 bits in turn) pass must drop, and a clean
//     re-run must raise it again;
//   * start while busy is ignored.
module tb_gf16_post;
  import gf_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             start, busy, done, pass;
  logic [3:0][15:0] aa, ab;
  logic [15:0]      y, y_seen, flip;
  gf_flags_t        fl;
  int               checks, failures;

  gf_dot4 #(.N(16)) u_dot (.a(aa), .b(ab), .y(y), .flags(fl));
  assign y_seen = y ^ flip;
  gf16_post dut (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy),
    .anchor_a(aa), .anchor_b(ab), .dot_y(y_seen), .done(done), .pass(pass)
  );

  // small positive integer -> GF16
  function automatic logic [15:0] int_to_gf16(input int v);
    int e;
    logic [9:0] m;
    e = 0;
    while ((v >> e) > 1) e++;
    m = 10'(v << (9 - e));
    return {1'b0, 6'(e + 31), m[8:0]};
  endfunction

  task automatic expect_bit(input logic got, input logic want, input string what);
    checks++;
    if (got !== want) begin
      failures++;
      if (failures <= 10) $display("%s: got %b want %b", what, got, want);
    end
  endtask

  // one start pulse; busy must be high for exactly one cycle
  task automatic rerun(input logic [15:0] f, input logic want_pass, input string what);
    @(negedge clk);
    flip = f;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    expect_bit(busy, 1'b1, {what, ": busy"});
    @(negedge clk);
    expect_bit(busy, 1'b0, {what, ": busy ends"});
    expect_bit(pass, want_pass, {what, ": pass"});
    flip = '0;
  endtask

  initial begin
    checks = 0;
    failures = 0;
    start = 1'b0;
    flip = '0;
    @(posedge clk);               // a clock edge inside reset initialises the flops
    #1;
    expect_bit(busy, 1'b1, "busy in reset");
    expect_bit(done, 1'b0, "done in reset");
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (aa[i] !== int_to_gf16(i + 1) || ab[i] !== int_to_gf16(i + 1)) begin
        failures++;
        $display("anchor operand %0d: %h %h", i, aa[i], ab[i]);
      end
    end
    checks++;
    if (y !== 16'h47c0) begin failures++; $display("dot4 anchor %h", y); end
    @(negedge clk);
    rst_n = 1'b1;
    expect_bit(busy, 1'b1, "busy in the first cycle");
    @(negedge clk);
    expect_bit(busy, 1'b0, "busy after one cycle");
    expect_bit(done, 1'b1, "done");
    expect_bit(pass, 1'b1, "pass");
    // corrupted results must fail, clean ones pass again
    for (int b = 0; b < 16; b++) begin
      rerun(16'(1 << b), 1'b0, $sformatf("flip bit %0d", b));
      expect_bit(done, 1'b1, "done stays");
      rerun('0, 1'b1, "clean rerun");
    end
    // start while busy is ignored: a two-cycle start pulse gives one busy cycle
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    expect_bit(busy, 1'b1, "long start: busy");
    @(negedge clk);
    start = 1'b0;
    expect_bit(busy, 1'b0, "long start: busy drops while start is high");
    @(negedge clk);
    expect_bit(busy, 1'b0, "long start: no second run");
    expect_bit(pass, 1'b1, "long start: pass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
