// gf_portfolio -- the GoldenFloat arithmetic portfolio: one adder and one
// multiplier for every rung that carries RTL (GF4, GF8, GF12, GF16, GF20,
// GF24, GF32, GF64, GF128, GF256), the GF16 dot4 kernel, the GF16 codec to
// and from IEEE binary32, and the Lucas-number accumulator, behind one
// request/response port.
//
// Every unit is an instance of the same width-generic template with its
// exponent/fraction split taken from the ladder rule E = round((N-1)/phi^2)
// (gf_pkg), which is the paper's point: one closed rule, one template,
// the whole ladder. How the units are gathered behind one port is this
// design's own choice; the paper does not describe a top level or pinout.
//
// Request (one per clock, no back-pressure): req_valid, req_op (gf_op_e),
// req_fmt (gf_fmt_e, index into gf_pkg::WIDTHS; used by OP_ADD/OP_MUL),
// req_a, req_b (operands right-aligned, upper bits ignored):
//   OP_ADD/OP_MUL : y = a op b at GF<WIDTHS[req_fmt]>
//   OP_DOT4       : a[63:0], b[63:0] hold four GF16 words each, element 0
//                   in bits 15:0; y = GF16 dot product
//   OP_ENC        : a[31:0] binary32 -> GF16
//   OP_DEC        : a[15:0] GF16 -> binary32
// Response: resp_valid, resp_y (zero-extended) and resp_flags, registered,
// one clock after the request. An unused format index returns 0 with the
// invalid flag set.
// req_ready is low only while the power-on self-test (gf16_post) owns the
// dot4 unit: the first cycle after reset and the cycle after a post_start
// pulse. Requests must wait for it (an assertion checks this); a request
// issued anyway is dropped. post_done / post_pass report the 0x47C0
// anchor check, which the paper names as the kernel's POST. The assertion
// is disabled during reset, which lint reports as rst_n used both as an
// asynchronous reset and as a clocked term.
// The Lucas accumulator has its own valid/ready port (luc_*), passed
// straight through; see lucas_accumulator for its timing.
module gf_portfolio
  import gf_pkg::*;
#(
  parameter  int LUCAS_N_MAX = 256,
  localparam int LUC_L_W     = (2 * LUCAS_N_MAX * 694242 + 999999) / 1000000 + 1,
  localparam int LUC_ACC_W   = LUC_L_W + 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // arithmetic request / response
  input  logic                 req_valid,
  output logic                 req_ready,
  input  gf_op_e               req_op,
  input  gf_fmt_e              req_fmt,
  input  logic [MAX_WIDTH-1:0] req_a,
  input  logic [MAX_WIDTH-1:0] req_b,
  output logic                 resp_valid,
  output logic [MAX_WIDTH-1:0] resp_y,
  output gf_flags_t            resp_flags,
  // GF16 power-on self-test
  input  logic                 post_start,
  output logic                 post_done,
  output logic                 post_pass,
  // Lucas accumulator
  input  logic                 luc_clear,
  input  logic                 luc_valid,
  output logic                 luc_ready,
  input  logic [$clog2(LUCAS_N_MAX+1)-1:0] luc_n,
  output logic [LUC_ACC_W-1:0] luc_acc,
  output logic [15:0]          luc_count,
  output logic [LUC_L_W-1:0]   luc_term,
  output logic                 luc_term_valid,
  output logic                 luc_overflow
);
  // ---------------------------------------------------------------- ladder
  logic [MAX_WIDTH-1:0] add_y [NUM_WIDTHS];
  logic [MAX_WIDTH-1:0] mul_y [NUM_WIDTHS];
  gf_flags_t            add_f [NUM_WIDTHS];
  gf_flags_t            mul_f [NUM_WIDTHS];

  for (genvar w = 0; w < NUM_WIDTHS; w++) begin : g_rung
    localparam int W = WIDTHS[w];
    logic [W-1:0] ya, ym;
    gf_add #(.N(W)) u_add (.a(req_a[W-1:0]), .b(req_b[W-1:0]), .y(ya), .flags(add_f[w]));
    gf_mul #(.N(W)) u_mul (.a(req_a[W-1:0]), .b(req_b[W-1:0]), .y(ym), .flags(mul_f[w]));
    assign add_y[w] = MAX_WIDTH'(ya);
    assign mul_y[w] = MAX_WIDTH'(ym);
  end

  // ------------------------------------------------------------ GF16 units
  logic [15:0] dot_y, enc_y;
  logic [31:0] dec_y;
  gf_flags_t   dot_f, enc_f, dec_f;

  logic             post_busy;
  logic [3:0][15:0] post_a, post_b, dot_a, dot_b;

  // the self-test borrows the dot4 unit for one cycle
  assign dot_a     = post_busy ? post_a : req_a[63:0];
  assign dot_b     = post_busy ? post_b : req_b[63:0];
  assign req_ready = !post_busy;

  gf_dot4 #(.N(16)) u_dot4 (.a(dot_a), .b(dot_b), .y(dot_y), .flags(dot_f));

  gf16_post u_post (
    .clk(clk), .rst_n(rst_n), .start(post_start), .busy(post_busy),
    .anchor_a(post_a), .anchor_b(post_b), .dot_y(dot_y),
    .done(post_done), .pass(post_pass)
  );

  gf_codec #(.N(16)) u_codec (
    .enc_in(req_a[31:0]), .enc_out(enc_y), .enc_flags(enc_f),
    .dec_in(req_a[15:0]), .dec_out(dec_y), .dec_flags(dec_f)
  );

  // ------------------------------------------------------- result select
  logic [MAX_WIDTH-1:0] sel_y;
  gf_flags_t            sel_f;
  logic                 fmt_ok;

  always_comb begin
    fmt_ok = (int'(req_fmt) < NUM_WIDTHS);
    sel_y  = '0;
    sel_f  = '0;
    unique case (req_op)
      OP_ADD: if (fmt_ok) begin sel_y = add_y[req_fmt]; sel_f = add_f[req_fmt]; end
              else sel_f.invalid = 1'b1;
      OP_MUL: if (fmt_ok) begin sel_y = mul_y[req_fmt]; sel_f = mul_f[req_fmt]; end
              else sel_f.invalid = 1'b1;
      OP_DOT4: begin sel_y = MAX_WIDTH'(dot_y); sel_f = dot_f; end
      OP_ENC:  begin sel_y = MAX_WIDTH'(enc_y); sel_f = enc_f; end
      OP_DEC:  begin sel_y = MAX_WIDTH'(dec_y); sel_f = dec_f; end
      default: sel_f.invalid = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid <= 1'b0;
      resp_y     <= '0;
      resp_flags <= '0;
    end else begin
      resp_valid <= req_valid && req_ready;
      if (req_valid && req_ready) begin
        resp_y     <= sel_y;
        resp_flags <= sel_f;
      end
    end
  end

  a_req_ready: assert property (@(posedge clk) disable iff (!rst_n) req_valid |-> req_ready)
    else $error("request issued while the self-test owns the dot4 unit");

  // ------------------------------------------------------ Lucas accumulator
  lucas_accumulator #(.N_MAX(LUCAS_N_MAX), .CNT_W(16)) u_lucas (
    .clk(clk), .rst_n(rst_n), .clear(luc_clear),
    .in_valid(luc_valid), .in_ready(luc_ready), .in_n(luc_n),
    .acc(luc_acc), .count(luc_count), .term(luc_term),
    .term_valid(luc_term_valid), .overflow(luc_overflow)
  );
endmodule
