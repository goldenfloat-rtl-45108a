// tb_gf_codec -- self-checking testbench of the GF16 <-> IEEE binary32
// codec.
//   decode: all 65536 GF16 codes, compared with a value built in double
//           precision and repacked as binary32;
//   encode: directed values (1.0, 30.0 = the dot4 anchor 0x47C0, ties,
//           overflow, underflow, infinities, NaN) and random binary32 words,
//           compared with a reference that normalises the double value by
//           repeated halving/doubling and rounds half-up with $floor;
//   round trip: encode(decode(c)) == c for every finite nonzero GF16 code.
// The codec is combinational; one vector per time unit.
module tb_gf_codec;
  import gf_pkg::*;

  logic [31:0] enc_in, dec_out;
  logic [15:0] enc_out, dec_in;
  gf_flags_t   enc_flags, dec_flags;
  int          checks, failures;

  gf_codec #(.N(16)) dut (
    .enc_in(enc_in), .enc_out(enc_out), .enc_flags(enc_flags),
    .dec_in(dec_in), .dec_out(dec_out), .dec_flags(dec_flags)
  );

  // binary32 bits -> real (exact), subnormals read as zero
  function automatic real f32_to_real(input logic [31:0] w);
    logic [63:0] d;
    if (w[30:23] == 8'h00) return w[31] ? -0.0 : 0.0;
    d = {w[31], 11'(int'(w[30:23]) - 127 + 1023), w[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // finite real -> binary32 bits; the value must be exact in binary32
  function automatic logic [31:0] real_to_f32(input real v);
    logic [63:0] d;
    if (v == 0.0) return 32'h0;
    d = $realtobits(v);
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  // GF16 code -> real
  function automatic real gf16_to_real(input logic [15:0] c);
    real m;
    int  e;
    m = 1.0 + real'(c[8:0]) / 512.0;
    e = int'(c[14:9]) - 31;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return c[15] ? -m : m;
  endfunction

  // real -> GF16 with round half-up on the magnitude
  function automatic logic [15:0] real_to_gf16(input real v, input logic s);
    real m;
    int  e, q;
    m = (v < 0.0) ? -v : v;
    if (m == 0.0) return {s, 15'd0};
    e = 0;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0) begin m = m * 2.0; e--; end
    q = int'($floor((m - 1.0) * 512.0 + 0.5));
    if (q == 512) begin q = 0; e++; end
    if (e > 31) return {s, 6'h3f, 9'd0};
    if (e < -30) return {s, 15'd0};
    return {s, 6'(e + 31), 9'(q)};
  endfunction

  task automatic expect_enc(input logic [31:0] x, input logic [15:0] want);
    enc_in = x;
    #1;
    checks++;
    if (enc_out !== want) begin
      failures++;
      if (failures <= 10) $display("encode %h: got %h want %h", x, enc_out, want);
    end
  endtask

  task automatic expect_dec(input logic [15:0] c, input logic [31:0] want);
    dec_in = c;
    #1;
    checks++;
    if (dec_out !== want) begin
      failures++;
      if (failures <= 10) $display("decode %h: got %h want %h", c, dec_out, want);
    end
  endtask

  initial begin
    logic [31:0] w;
    logic [15:0] c;
    checks = 0;
    failures = 0;
    enc_in = '0;
    dec_in = '0;
    #1;
    // directed encodes
    expect_enc(32'h3f80_0000, 16'h3e00);          // 1.0
    expect_enc(32'h41f0_0000, 16'h47c0);          // 30.0, the dot4 anchor
    expect_enc(32'hc1f0_0000, 16'hc7c0);          // -30.0
    expect_enc(32'h3f80_2000, 16'h3e01);          // 1 + 2^-10: tie, rounds up
    expect_enc(32'h3f80_1fff, 16'h3e00);          // just below the tie
    expect_enc(32'h7f00_0000, 16'h7e00);          // 2^127: overflow to +inf
    expect_enc(32'h0080_0000, 16'h0000);          // 2^-126: underflow to +0
    expect_enc(32'hff80_0000, 16'hfe00);          // -inf
    expect_enc(32'h7fc0_0000, 16'h7f00);          // NaN
    expect_enc(32'h8000_0000, 16'h8000);          // -0
    expect_enc(32'h3fff_ffff, 16'h4000);          // rounding carry into the exponent
    // exhaustive decode and round trip
    for (int i = 0; i < 65536; i++) begin
      c = 16'(i);
      if (c[14:9] == 6'h3f)
        expect_dec(c, (c[8:0] == '0) ? {c[15], 8'hff, 23'd0} : 32'h7fc0_0000);
      else if (c[14:9] == 6'h00)
        expect_dec(c, {c[15], 31'd0});
      else begin
        expect_dec(c, real_to_f32(gf16_to_real(c)));
        expect_enc(dec_out, c);
      end
    end
    // random encodes
    for (int i = 0; i < 30000; i++) begin
      w = $urandom;
      if (i % 2 == 0) w[30:23] = 8'(96 + $urandom_range(0, 64));   // mostly in GF16 range
      if (w[30:23] == 8'hff) continue;
      expect_enc(w, real_to_gf16(f32_to_real(w), w[31]));
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
