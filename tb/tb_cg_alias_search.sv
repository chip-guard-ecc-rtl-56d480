// tb_cg_alias_search -- exhaustive alias searches over the mask table, run
// through the real encoder and decoder.
//
// The method certifies a mask table by exhaustive searches for aliasing. The
// full searches (all 2^32 patterns of every DQ pair, all faults of up to 10
// bits) are far too large for RTL simulation; this testbench runs the
// smaller classes completely:
//   A. every fault of 1 to 3 bits on every chip, and the inverse of each
//      (all but 1 to 3 bits flipped): must be corrected and restore the line;
//   B. every 2-DQ bounded fault confined to the first 8 of the 16 beats of a
//      chip (6 DQ pairs x 65,535 patterns per chip): must be corrected;
//   C. every aligned set of N = 1 to 3 bit pairs on any two chips (these
//      cancel in parity): must be reported uncorrectable.
// About 6.8 million decodes in all.
// Because the signature is separable the outcome does not depend on the data,
// so one random line is used throughout.
module tb_cg_alias_search;
  import cg_pkg::*;

  int checks = 0, failures = 0;
  int n_a = 0, n_b = 0, n_c = 0;

  line_t      d, od;
  meta_t      m, om;
  burst_t     wr, rd;
  cg_status_e st;
  chip_idx_t  fx;
  chip_vec_t  mt;

  cg_encoder u_enc (.data(d), .meta(m), .burst(wr));
  cg_decoder u_dec (.burst(rd), .data(od), .meta(om), .status(st), .fix_chip(fx), .match(mt));

  task automatic expect_fixed(input int c, input chip_t e);
    rd = wr;
    rd[c] ^= e;
    #1;
    checks++;
    if (st !== CG_CORRECTED || fx !== chip_idx_t'(c) || od !== d || om !== m) begin
      failures++;
      if (failures < 20) $display("FAIL: chip %0d fault %h status %0d fix %0d match %b", c, e, st, fx, mt);
    end
  endtask

  task automatic expect_flagged(input int c0, input int c1, input chip_t e);
    rd = wr;
    rd[c0] ^= e;
    rd[c1] ^= e;
    #1;
    checks++;
    if (st !== CG_UNCORRECTABLE) begin
      failures++;
      if (failures < 20) $display("FAIL: pairs on chips %0d,%0d pattern %h not flagged", c0, c1, e);
    end
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chip_t e;
    for (int c = 0; c < 8; c++) d[c] = {$urandom(), $urandom()};
    m = meta_t'($urandom());
    #1;

    // A: 1- to 3-bit faults and their inverses
    for (int c = 0; c < 10; c++)
      for (int i = 0; i < 64; i++)
        for (int j = i; j < 64; j++)
          for (int k = j; k < 64; k++) begin
            if (k != j && j == i) continue;  // {i,i,k} duplicates {i,k,k}
            e = (64'd1 << i) | (64'd1 << j) | (64'd1 << k);
            expect_fixed(c, e);
            expect_fixed(c, ~e);
            n_a += 2;
          end

    // B: bounded 2-DQ faults within beats 0..7
    for (int c = 0; c < 10; c++)
      for (int q0 = 0; q0 < 4; q0++)
        for (int q1 = q0 + 1; q1 < 4; q1++)
          for (int p = 1; p < 65536; p++) begin
            e = '0;
            for (int k = 0; k < 8; k++) begin
              e[4*k + q0] = p[2*k];
              e[4*k + q1] = p[2*k + 1];
            end
            expect_fixed(c, e);
            n_b++;
          end

    // C: N = 1 to 3 aligned bit pairs on two chips
    for (int c0 = 0; c0 < 10; c0++)
      for (int c1 = c0 + 1; c1 < 10; c1++)
        for (int i = 0; i < 64; i++)
          for (int j = i; j < 64; j++)
            for (int k = j; k < 64; k++) begin
              if (k != j && j == i) continue;
              expect_flagged(c0, c1, (64'd1 << i) | (64'd1 << j) | (64'd1 << k));
              n_c++;
            end

    $display("single-chip faults A=%0d bounded B=%0d aligned pairs C=%0d", n_a, n_b, n_c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
