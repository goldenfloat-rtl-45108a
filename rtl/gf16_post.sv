// gf16_post -- power-on self-test of the GF16 dot-product datapath.
//
// The GoldenFloat GF16 kernel is accepted by one canonical check: the dot
// product (1,2,3,4).(1,2,3,4) must give 30, which is the GF16 word 0x47C0
// (exponent field 35 = 4 + bias 31, fraction 0.875 x 512 = 448). The paper
// names this check the "0x47C0 POST anchor" and says it must be re-run on
// returned silicon; this controller runs it on the real dot4 unit after
// every reset, and again on each start pulse.
//
// How it works: while `busy` is high it asks the owner of the shared dot4
// unit to feed it `anchor_a`/`anchor_b` (both the GF16 vector 1, 2, 3, 4)
// instead of its normal operands. At the end of that single cycle it
// compares the combinational result `dot_y` with 0x47C0 and latches `pass`
// and `done`.
//
// Interface and timing:
//   clk, rst_n  clock, asynchronous active-low reset
//   start       re-run the test (ignored while busy)
//   busy        high for exactly one cycle: the first cycle after reset and
//               the cycle after a start pulse
//   anchor_a/b  the anchor operands, constant
//   dot_y       dot4 result for the anchor operands, sampled at the end of
//               the busy cycle
//   done, pass  done rises when the first test ends; pass holds the result
//               of the latest test
// The anchor and its expected word follow the paper; the one-cycle
// sequencing, the start input and the port set are this design's own.
module gf16_post (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  output logic [3:0][15:0] anchor_a,
  output logic [3:0][15:0] anchor_b,
  input  logic [15:0]      dot_y,
  output logic             done,
  output logic             pass
);
  localparam logic [15:0] ANCHOR_Y = 16'h47C0;

  // GF16 encodings of 1, 2, 3, 4 (exponent 31, 32, 32, 33)
  localparam logic [3:0][15:0] ANCHOR_V = {16'h4200, 16'h4100, 16'h4000, 16'h3E00};

  assign anchor_a = ANCHOR_V;
  assign anchor_b = ANCHOR_V;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b1;
      done <= 1'b0;
      pass <= 1'b0;
    end else if (busy) begin
      busy <= 1'b0;
      done <= 1'b1;
      pass <= (dot_y == ANCHOR_Y);
    end else if (start) begin
      busy <= 1'b1;
    end
  end
endmodule
