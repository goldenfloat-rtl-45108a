// tb_lucas_accumulator -- self-checking testbench of the Lucas-number
// accumulator.
// The reference table L_0 .. L_(2 N_MAX) is built in the testbench with the
// plain recurrence L_k = L_(k-1) + L_(k-2), not the even-index recurrence
// the unit uses, and spot values are also compared with published Lucas
// numbers (L_2 = 3, L_4 = 7, L_8 = 47, L_16 = 2207, L_32 = 4870847,
// L_64 = 23725150497407) and with the size of L_512 (about 1.004e107, a
// 356-bit integer). Every index of the range n = 1 ... 256 is then fed
// through the unit. For every index the testbench checks the term, the
// running sum, the count and the latency: the term must be added exactly
// max(n,1) cycles after the index is accepted. A second instance with a
// 3-bit count checks the sticky overflow flag and clear.
module tb_lucas_accumulator;
  localparam int N_MAX = 256;
  localparam int IDX_W = $clog2(N_MAX + 1);
  localparam int L_W   = (2 * N_MAX * 694242 + 999999) / 1000000 + 1;
  localparam int CNT_W = 16;
  localparam int ACC_W = L_W + CNT_W;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             clear, in_valid, in_ready, term_valid, overflow;
  logic [IDX_W-1:0] in_n;
  logic [ACC_W-1:0] acc;
  logic [CNT_W-1:0] count;
  logic [L_W-1:0]   term;

  lucas_accumulator #(.N_MAX(N_MAX)) dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .in_valid(in_valid), .in_ready(in_ready),
    .in_n(in_n), .acc(acc), .count(count), .term(term), .term_valid(term_valid),
    .overflow(overflow)
  );

  // small instance for overflow: N_MAX = 8, 3-bit count
  logic       s_clear, s_valid, s_ready, s_tv, s_ovf;
  logic [3:0] s_n;
  logic [2:0] s_count;
  logic [13:0] s_term;
  logic [16:0] s_acc;
  lucas_accumulator #(.N_MAX(8), .IDX_W(4), .L_W(14), .CNT_W(3), .ACC_W(17)) dut_small (
    .clk(clk), .rst_n(rst_n), .clear(s_clear), .in_valid(s_valid), .in_ready(s_ready),
    .in_n(s_n), .acc(s_acc), .count(s_count), .term(s_term), .term_valid(s_tv),
    .overflow(s_ovf)
  );

  logic [L_W-1:0]   lucas [0:2*N_MAX];
  logic [ACC_W-1:0] sum_ref;
  int checks, failures;
  int cyc = 0;

  always_ff @(posedge clk) cyc <= cyc + 1;

  task automatic expect_eq(input logic [ACC_W-1:0] got, input logic [ACC_W-1:0] want,
                           input string what);
    checks++;
    if (got !== want) begin
      failures++;
      if (failures <= 10) $display("%s: got %0d want %0d", what, got, want);
    end
  endtask

  task automatic push(input int n);
    int t0, lat;
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    in_valid = 1'b1;
    in_n = IDX_W'(n);
    @(posedge clk);
    #1 t0 = cyc;                  // cycles counted from the accepting edge
    @(negedge clk);
    in_valid = 1'b0;
    while (!term_valid) @(negedge clk);
    lat = cyc - t0;
    sum_ref = sum_ref + ACC_W'(lucas[2 * n]);
    expect_eq(ACC_W'(term), ACC_W'(lucas[2 * n]), $sformatf("term L_%0d", 2 * n));
    expect_eq(acc, sum_ref, $sformatf("sum after n=%0d", n));
    checks++;
    if (lat != ((n > 0) ? n : 1)) begin
      failures++;
      $display("latency for n=%0d: %0d cycles", n, lat);
    end
  endtask

  initial begin
    int n_terms;
    checks = 0;
    failures = 0;
    clear = 1'b0;
    in_valid = 1'b0;
    in_n = '0;
    s_clear = 1'b0;
    s_valid = 1'b0;
    s_n = '0;
    sum_ref = '0;
    lucas[0] = L_W'(2);
    lucas[1] = L_W'(1);
    for (int k = 2; k <= 2 * N_MAX; k++) lucas[k] = lucas[k-1] + lucas[k-2];
    // the reference itself against published values
    expect_eq(ACC_W'(lucas[2]), 3, "L_2");
    expect_eq(ACC_W'(lucas[4]), 7, "L_4");
    expect_eq(ACC_W'(lucas[8]), 47, "L_8");
    expect_eq(ACC_W'(lucas[16]), 2207, "L_16");
    expect_eq(ACC_W'(lucas[32]), 4870847, "L_32");
    expect_eq(ACC_W'(lucas[64]), ACC_W'(64'd23725150497407), "L_64");
    checks++;
    if (lucas[512][L_W-1] || !lucas[512][355] || lucas[512][356]) begin
      failures++;
      $display("L_512 is not a 356-bit number");
    end

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // the rows of the published table, then n = 0 and random indices
    push(1); push(2); push(4); push(8); push(16); push(32); push(64);
    push(128); push(192); push(256); push(0);
    // the whole verified range, n = 1 .. 256
    for (int n = 1; n <= N_MAX; n++) push(n);
    n_terms = 11 + N_MAX;
    expect_eq(ACC_W'(count), ACC_W'(n_terms), "count");
    checks++;
    if (overflow) begin failures++; $display("unexpected overflow"); end

    // clear
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    sum_ref = '0;
    expect_eq(acc, '0, "acc after clear");
    expect_eq(ACC_W'(count), '0, "count after clear");
    push(5);

    // overflow on the small instance: the ninth term wraps a 3-bit count
    for (int i = 0; i < 9; i++) begin
      @(negedge clk);
      while (!s_ready) @(negedge clk);
      s_valid = 1'b1;
      s_n = 4'd8;
      @(negedge clk);
      s_valid = 1'b0;
      while (!s_tv) @(negedge clk);
      checks++;
      if (s_ovf !== (i == 7 || i == 8)) begin
        failures++;
        $display("small instance: overflow=%b after %0d terms", s_ovf, i + 1);
      end
    end
    expect_eq(ACC_W'(s_term), 2207, "small instance L_16");
    @(negedge clk);
    s_clear = 1'b1;
    @(negedge clk);
    s_clear = 1'b0;
    checks++;
    if (s_ovf || s_count != 0) begin failures++; $display("small instance clear"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
