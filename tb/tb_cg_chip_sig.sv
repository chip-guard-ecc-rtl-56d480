// tb_cg_chip_sig -- self-checking test of the per-chip partial signature.
//
// Checks the generated mask table against the rules of the code (each data
// mask has 8 bits set and all 512 data masks are distinct, each metabit mask
// has 19 bits set, unused chip-8 rows are zero, no signature bit needs an
// XOR tree deeper than 7 levels), then drives random values
// into instances for data chips 0, 3, 7 and the metabit chip 8 and compares
// each output with a bit-by-bit XOR of the masks. Also checks separability:
// sig(a) ^ sig(b) == sig(a ^ b).
module tb_cg_chip_sig;
  import cg_pkg::*;

  int checks = 0, failures = 0;

  logic [63:0] in0, in3, in7;
  logic [15:0] in8;
  sig_t        s0, s3, s7, s8;

  cg_chip_sig #(.CHIP(0)) u0 (.bits(in0), .sig(s0));
  cg_chip_sig #(.CHIP(3)) u3 (.bits(in3), .sig(s3));
  cg_chip_sig #(.CHIP(7)) u7 (.bits(in7), .sig(s7));
  cg_chip_sig #(.CHIP(8)) u8 (.bits(in8), .sig(s8));

  function automatic sig_t expect_sig(input int c, input logic [63:0] v, input int n);
    sig_t s = '0;
    for (int b = 0; b < n; b++) if (v[b]) s ^= SIG_MAP[c][b];
    return s;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sig_t  a0, a3, a7, a8;
    logic [63:0] v0, v3, v7;
    logic [15:0] v8;
    bit dup;

    // mask table rules
    dup = 0;
    for (int c = 0; c < 8; c++)
      for (int b = 0; b < 64; b++) begin
        check($countones(SIG_MAP[c][b]) == 8, $sformatf("weight of S(%0d,%0d)", c, b));
        for (int c2 = 0; c2 < 8; c2++)
          for (int b2 = 0; b2 < 64; b2++)
            if ((c2 * 64 + b2) > (c * 64 + b) && SIG_MAP[c][b] == SIG_MAP[c2][b2]) dup = 1;
      end
    check(!dup, "data masks distinct");
    for (int b = 0; b < 16; b++) check($countones(SIG_MAP[8][b]) == 19, "metabit weight");
    for (int b = 16; b < 64; b++) check(SIG_MAP[8][b] == '0, "unused chip-8 rows");

    // each signature bit is an XOR tree of at most 7 levels (<= 128 inputs)
    begin
      int fan, fan_max = 0;
      for (int s = 0; s < 48; s++) begin
        fan = 0;
        for (int c = 0; c <= 8; c++)
          for (int b = 0; b < 64; b++) fan += int'(SIG_MAP[c][b][s]);
        if (fan > fan_max) fan_max = fan;
        check(fan >= 2 && fan <= 128, $sformatf("fan-in %0d of signature bit %0d", fan, s));
      end
      $display("largest signature-bit fan-in: %0d", fan_max);
    end

    // single-bit inputs give the mask itself
    for (int b = 0; b < 64; b++) begin
      in0 = 64'd1 << b; in3 = 64'd1 << b; in7 = 64'd1 << b; in8 = 16'(1 << (b % 16));
      #1;
      check(s0 === SIG_MAP[0][b], "unit chip0");
      check(s3 === SIG_MAP[3][b], "unit chip3");
      check(s7 === SIG_MAP[7][b], "unit chip7");
      check(s8 === SIG_MAP[8][b % 16], "unit chip8");
    end

    // random values and separability
    for (int t = 0; t < 300; t++) begin
      v0 = {$urandom(), $urandom()}; v3 = {$urandom(), $urandom()};
      v7 = {$urandom(), $urandom()}; v8 = 16'($urandom());
      in0 = v0; in3 = v3; in7 = v7; in8 = v8;
      #1;
      check(s0 === expect_sig(0, v0, 64), "random chip0");
      check(s3 === expect_sig(3, v3, 64), "random chip3");
      check(s7 === expect_sig(7, v7, 64), "random chip7");
      check(s8 === expect_sig(8, {48'd0, v8}, 16), "random chip8");
      a0 = s0; a3 = s3; a7 = s7; a8 = s8;
      in0 = {$urandom(), $urandom()}; in3 = in0; in7 = in0; in8 = in0[15:0];
      #1;
      a0 ^= s0; a3 ^= s3; a7 ^= s7; a8 ^= s8;
      v0 ^= in0; v3 ^= in3; v7 ^= in7; v8 ^= in8;
      in0 = v0; in3 = v3; in7 = v7; in8 = v8;
      #1;
      check(s0 === a0 && s3 === a3 && s7 === a7 && s8 === a8, "separability");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
