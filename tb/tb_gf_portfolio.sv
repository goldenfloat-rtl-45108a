// tb_gf_portfolio -- end-to-end testbench of the GoldenFloat portfolio top
// at its default parameters.
//
// A request is issued on every clock (back to back) and every response is
// checked one clock later against expectations queued at issue time:
//   ADD / MUL at each of the ten rungs against gf_ref_model instances that
//   see the same operands; DOT4 with the 0x47C0 anchor and exact integer
//   vectors; ENC / DEC of GF16 against directed binary32 values; an unused
//   format index, which must answer 0 with the invalid flag.
// In parallel the Lucas port takes a stream of indices while its valid is
// held high, so the unit stalls the stream (ready low) while it iterates;
// the sum is checked against a table built with L_k = L_(k-1) + L_(k-2).
// Each mechanism is counted, and one that never happened counts a failure:
// every rung's add and multiply, dot4, encode, decode, overflow to
// infinity, flush to zero, NaN, inexact rounding, a rounding carry into the
// exponent, the invalid-format answer, Lucas stalls and Lucas terms, and
// the GF16 self-test (0x47C0 anchor) after reset and on request, with
// req_ready low for its one cycle.
module tb_gf_portfolio;
  import gf_pkg::*;

  localparam int LN_MAX = 256;
  localparam int L_W    = (2 * LN_MAX * 694242 + 999999) / 1000000 + 1;
  localparam int ACC_W  = L_W + 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 req_valid;
  gf_op_e               req_op;
  gf_fmt_e              req_fmt;
  logic [MAX_WIDTH-1:0] req_a, req_b, resp_y;
  logic                 resp_valid, req_ready, post_start, post_done, post_pass;
  gf_flags_t            resp_flags;
  logic                 luc_clear, luc_valid, luc_ready, luc_term_valid, luc_overflow;
  logic [8:0]           luc_n;
  logic [ACC_W-1:0]     luc_acc;
  logic [15:0]          luc_count;
  logic [L_W-1:0]       luc_term;

  gf_portfolio dut (
    .clk(clk), .rst_n(rst_n),
    .req_valid(req_valid), .req_ready(req_ready), .req_op(req_op), .req_fmt(req_fmt), .req_a(req_a), .req_b(req_b),
    .resp_valid(resp_valid), .resp_y(resp_y), .resp_flags(resp_flags),
    .post_start(post_start), .post_done(post_done), .post_pass(post_pass),
    .luc_clear(luc_clear), .luc_valid(luc_valid), .luc_ready(luc_ready), .luc_n(luc_n),
    .luc_acc(luc_acc), .luc_count(luc_count), .luc_term(luc_term),
    .luc_term_valid(luc_term_valid), .luc_overflow(luc_overflow)
  );

  // ----------------------------------------------------------- references
  logic [MAX_WIDTH-1:0] ref_add [NUM_WIDTHS];
  logic [MAX_WIDTH-1:0] ref_mul [NUM_WIDTHS];
  for (genvar w = 0; w < NUM_WIDTHS; w++) begin : g_ref
    localparam int W = WIDTHS[w];
    localparam int E = gf_exp_bits(W);
    localparam int M = gf_frac_bits(W);
    logic [W-1:0] ya, ym;
    gf_ref_model #(.N(W), .XW(400 + 4 * M + 16 + ((E <= 9) ? (1 << E) : 0)))
      u_ref (.a(req_a[W-1:0]), .b(req_b[W-1:0]), .y_add(ya), .y_mul(ym));
    assign ref_add[w] = MAX_WIDTH'(ya);
    assign ref_mul[w] = MAX_WIDTH'(ym);
  end

  // ------------------------------------------------------------- counters
  typedef enum int {
    EV_DOT4, EV_ENC, EV_DEC, EV_OVERFLOW, EV_UNDERFLOW, EV_NAN, EV_INEXACT,
    EV_ROUND_CARRY, EV_BAD_FMT, EV_LUC_STALL, EV_LUC_TERM, EV_POST, EV_COUNT
  } ev_e;
  int ev [EV_COUNT];
  int ev_add [NUM_WIDTHS];
  int ev_mul [NUM_WIDTHS];
  int checks, failures;

  typedef struct {
    logic [MAX_WIDTH-1:0] y;
    bit                   check_flags;
    gf_flags_t            flags;
    string                what;
    int                   evt;        // mechanism counted when this response is right
  } exp_t;
  int next_evt = -1;
  exp_t q [$];

  // random GF<W> word, exponent kept within +-200 on wide rungs
  function automatic logic [MAX_WIDTH-1:0] rnd_word(input int w);
    logic [MAX_WIDTH-1:0] x, field;
    int e, m, ue;
    e = gf_exp_bits(w);
    m = gf_frac_bits(w);
    x = '0;
    for (int i = 0; i < MAX_WIDTH; i += 32) x = (x << 32) | MAX_WIDTH'($urandom);
    x = x & ((MAX_WIDTH'(1) << w) - 1);
    if (e > 9) begin
      ue = int'($urandom_range(0, 400)) - 200;
      field = (MAX_WIDTH'(1) << (e - 1)) - 1 + MAX_WIDTH'(ue);
      case ($urandom_range(0, 15))
        0: field = '0;                              // zero
        1: field = MAX_WIDTH'(1) << e;              // all ones after the mask: inf/NaN
        default: ;
      endcase
      if (field == MAX_WIDTH'(1) << e) field = field - 1;
      field = field & ((MAX_WIDTH'(1) << e) - 1);
      x = (x & ~(((MAX_WIDTH'(1) << e) - 1) << m)) | (field << m);
    end
    return x;
  endfunction

  function automatic logic [15:0] int_to_gf16(input int v);
    int e;
    logic [9:0] mm;
    if (v == 0) return 16'h0000;
    e = 0;
    while ((v >> e) > 1) e++;
    mm = 10'(v << (9 - e));
    return {1'b0, 6'(e + 31), mm[8:0]};
  endfunction

  // drive one request for a clock and queue its expectation
  task automatic issue(input gf_op_e op, input int fmt, input logic [MAX_WIDTH-1:0] a,
                       input logic [MAX_WIDTH-1:0] b, input logic [MAX_WIDTH-1:0] want,
                       input bit chk_fl, input gf_flags_t fl, input string what);
    exp_t x;
    @(negedge clk);
    req_valid = 1'b1;
    req_op    = op;
    req_fmt   = gf_fmt_e'(fmt);
    req_a     = a;
    req_b     = b;
    #1;
    x.y = (op == OP_ADD && fmt < NUM_WIDTHS) ? ref_add[fmt] :
          (op == OP_MUL && fmt < NUM_WIDTHS) ? ref_mul[fmt] : want;
    x.check_flags = chk_fl;
    x.flags = fl;
    x.what = what;
    x.evt = next_evt;
    next_evt = -1;
    if (op == OP_ADD && fmt < NUM_WIDTHS) ev_add[fmt]++;
    if (op == OP_MUL && fmt < NUM_WIDTHS) ev_mul[fmt]++;
    q.push_back(x);
  endtask

  // response checker
  always @(posedge clk) begin
    #1;
    if (rst_n && resp_valid) begin
      exp_t x;
      if (q.size() == 0) begin
        failures++;
        $display("response with nothing outstanding");
      end else begin
        x = q.pop_front();
        checks++;
        if (resp_y !== x.y || (x.check_flags && resp_flags !== x.flags)) begin
          failures++;
          if (failures <= 12)
            $display("%s: got %h flags %b, want %h flags %b", x.what, resp_y, resp_flags,
                     x.y, x.flags);
        end else if (x.evt >= 0) begin
          ev[x.evt]++;
        end
        if (resp_flags.overflow)  ev[EV_OVERFLOW]++;
        if (resp_flags.underflow) ev[EV_UNDERFLOW]++;
        if (resp_flags.invalid)   ev[EV_NAN]++;
        if (resp_flags.inexact)   ev[EV_INEXACT]++;
      end
    end
  end

  // ------------------------------------------------------ Lucas stream
  logic [L_W-1:0]   lucas [0:2*LN_MAX];
  logic [ACC_W-1:0] luc_ref;
  int               luc_idx [$];

  always @(negedge clk)
    if (rst_n && luc_valid && !luc_ready) ev[EV_LUC_STALL]++;

  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      if (luc_term_valid) begin
        ev[EV_LUC_TERM]++;
        checks++;
        if (luc_idx.size() == 0 || luc_term !== lucas[2 * luc_idx[0]]) begin
          failures++;
          $display("Lucas term mismatch");
        end else begin
          luc_ref = luc_ref + ACC_W'(lucas[2 * luc_idx[0]]);
          void'(luc_idx.pop_front());
        end
        checks++;
        if (luc_acc !== luc_ref) begin
          failures++;
          $display("Lucas sum mismatch after %0d terms", luc_count);
        end
      end
    end
  end

  // expects req_ready low now and high again after the next clock edge,
  // with a passing self-test
  task automatic post_check(input string when);
    #1;
    checks++;
    if (req_ready !== 1'b0) begin failures++; $display("self-test %s: not busy", when); end
    @(posedge clk);
    #1;
    checks++;
    if (req_ready !== 1'b1 || post_done !== 1'b1 || post_pass !== 1'b1) begin
      failures++;
      $display("self-test %s: ready %b done %b pass %b", when, req_ready, post_done, post_pass);
    end else ev[EV_POST]++;
  endtask

  task automatic lucas_stream();
    int idx [8] = '{1, 2, 16, 64, 0, 128, 256, 33};
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      luc_valid = 1'b1;
      luc_n = 9'(idx[i]);
      while (!luc_ready) @(negedge clk);   // stalled: valid held, ready low
      @(posedge clk);
      luc_idx.push_back(idx[i]);           // accepted on this edge
    end
    @(negedge clk);
    luc_valid = 1'b0;
  endtask

  // ------------------------------------------------------------ stimulus
  task automatic arith_stream();
    gf_flags_t nofl;
    logic [3:0][15:0] va, vb;
    int dot;
    nofl = '0;
    // every rung: random adds and multiplies
    for (int r = 0; r < 60; r++)
      for (int w = 0; w < NUM_WIDTHS; w++) begin
        issue(OP_ADD, w, rnd_word(WIDTHS[w]), rnd_word(WIDTHS[w]), '0, 0, nofl, $sformatf("add GF%0d", WIDTHS[w]));
        issue(OP_MUL, w, rnd_word(WIDTHS[w]), rnd_word(WIDTHS[w]), '0, 0, nofl, $sformatf("mul GF%0d", WIDTHS[w]));
      end
    // GF16 directed: overflow, flush to zero, NaN, rounding carry
    issue(OP_MUL, int'(FMT_GF16), 256'h7bff, 256'h7bff, 256'h7e00, 1, 4'b0101, "GF16 overflow");
    issue(OP_MUL, int'(FMT_GF16), 256'h0400, 256'h0400, 256'h0000, 1, 4'b0011, "GF16 flush to zero");
    issue(OP_MUL, int'(FMT_GF16), 256'h7e00, 256'h0000, 256'h7f00, 1, 4'b1000, "GF16 inf x 0");
    // (1 + 511/512)^2 rounds up into the next binade: carry out of the fraction
    issue(OP_MUL, int'(FMT_GF16), 256'h3fff, 256'h3e00, 256'h3fff, 1, 4'b0000, "GF16 x 1.0");
    next_evt = EV_ROUND_CARRY;
    issue(OP_ADD, int'(FMT_GF16), 256'h3fff, 256'h2a00, 256'h4000, 1, 4'b0001, "GF16 rounding carry");
    // paper's audit cases at GF256: 1.0 x 1.0 and 1.5 x 1.5
    begin
      logic [MAX_WIDTH-1:0] one, one5;
      one  = {1'b0, 1'b0, {96{1'b1}}, 158'd0};
      one5 = one | (MAX_WIDTH'(1) << 157);
      issue(OP_MUL, int'(FMT_GF256), one, one, one, 1, nofl, "GF256 1.0 x 1.0");
      issue(OP_MUL, int'(FMT_GF256), one5, one5, '0, 0, nofl, "GF256 1.5 x 1.5");
    end
    // unused format index
    next_evt = EV_BAD_FMT;
    issue(OP_ADD, 12, 256'h1, 256'h1, '0, 1, 4'b1000, "bad format");
    // dot4: the anchor and exact integer vectors
    for (int i = 0; i < 4; i++) begin
      va[i] = int_to_gf16(i + 1);
      vb[i] = int_to_gf16(i + 1);
    end
    next_evt = EV_DOT4;
    issue(OP_DOT4, 0, MAX_WIDTH'(va), MAX_WIDTH'(vb), 256'h47c0, 1, nofl, "dot4 anchor");
    for (int t = 0; t < 20; t++) begin
      dot = 0;
      for (int i = 0; i < 4; i++) begin
        int x1, x2;
        x1 = int'($urandom_range(0, 11));
        x2 = int'($urandom_range(0, 11));
        dot += x1 * x2;
        va[i] = int_to_gf16(x1);
        vb[i] = int_to_gf16(x2);
      end
      next_evt = EV_DOT4;
      issue(OP_DOT4, 0, MAX_WIDTH'(va), MAX_WIDTH'(vb), MAX_WIDTH'(int_to_gf16(dot)), 0, nofl,
            "dot4 integers");
    end
    // codec
    next_evt = EV_ENC;
    issue(OP_ENC, 0, 256'h41f0_0000, '0, 256'h47c0, 1, nofl, "encode 30.0");
    next_evt = EV_ENC;
    issue(OP_ENC, 0, 256'h3f80_2000, '0, 256'h3e01, 1, 4'b0001, "encode tie");
    next_evt = EV_ENC;
    issue(OP_ENC, 0, 256'h7f00_0000, '0, 256'h7e00, 1, 4'b0101, "encode overflow");
    next_evt = EV_DEC;
    issue(OP_DEC, 0, 256'h47c0, '0, 256'h41f0_0000, 1, nofl, "decode 0x47C0");
    next_evt = EV_DEC;
    issue(OP_DEC, 0, 256'hbe00, '0, 256'hbf80_0000, 1, nofl, "decode -1.0");
    next_evt = EV_DEC;
    issue(OP_DEC, 0, 256'h7f00, '0, 256'h7fc0_0000, 1, 4'b1000, "decode NaN");
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  initial begin
    checks = 0;
    failures = 0;
    foreach (ev[i]) ev[i] = 0;
    foreach (ev_add[i]) begin ev_add[i] = 0; ev_mul[i] = 0; end
    req_valid = 1'b0;
    req_op = OP_ADD;
    req_fmt = FMT_GF4;
    req_a = '0;
    req_b = '0;
    post_start = 1'b0;
    luc_clear = 1'b0;
    luc_valid = 1'b0;
    luc_n = '0;
    luc_ref = '0;
    lucas[0] = L_W'(2);
    lucas[1] = L_W'(1);
    for (int k = 2; k <= 2 * LN_MAX; k++) lucas[k] = lucas[k-1] + lucas[k-2];
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // power-on self-test: one cycle with req_ready low, then pass
    post_check("after reset");
    fork
      arith_stream();
      lucas_stream();
    join
    // re-run the self-test on request, then use the dot4 unit again
    @(negedge clk);
    post_start = 1'b1;
    @(negedge clk);
    post_start = 1'b0;
    post_check("on request");
    next_evt = EV_DOT4;
    issue(OP_DOT4, 0, MAX_WIDTH'({int_to_gf16(4), int_to_gf16(3), int_to_gf16(2), int_to_gf16(1)}),
          MAX_WIDTH'({4{int_to_gf16(1)}}),
          256'(int_to_gf16(10)), 1, 4'b0000, "dot4 after self-test");
    @(negedge clk);
    req_valid = 1'b0;
    repeat (300) @(posedge clk);
    checks++;
    if (q.size() != 0 || luc_idx.size() != 0) begin
      failures++;
      $display("outstanding: %0d responses, %0d Lucas terms", q.size(), luc_idx.size());
    end
    checks++;
    if (luc_count != 16'd8) begin failures++; $display("Lucas count %0d", luc_count); end
    // every mechanism must have happened
    for (int i = 0; i < EV_COUNT; i++) begin
      $display("%-16s %0d", ev_e'(i), ev[i]);
      checks++;
      if (ev[i] == 0) begin failures++; $display("  never happened"); end
    end
    for (int w = 0; w < NUM_WIDTHS; w++) begin
      checks++;
      if (ev_add[w] == 0 || ev_mul[w] == 0) begin
        failures++;
        $display("GF%0d add or mul never exercised", WIDTHS[w]);
      end
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
