// tb_cg_locator -- self-checking test of the erasure search.
//
// Bursts are built with the reference encoder and hit with faults: none,
// bounded (2-DQ) and arbitrary faults on each chip, the chip-8/chip-9 alias
// patterns of the metabits, and faults on two or three chips. The syndromes
// are computed by the reference model and driven into the locator; its match
// vector, status and chip are compared with the reference decoder, which
// tries every chip flip and re-checks the whole burst.
module tb_cg_locator;
  import cg_pkg::*;
  import tb_cg_ref_pkg::*;

  int checks = 0, failures = 0;

  chip_t      psyn;
  sig_t       ssyn;
  chip_vec_t  match;
  cg_status_e status;
  chip_idx_t  fix_chip;

  cg_locator dut (.psyn(psyn), .ssyn(ssyn), .match(match), .status(status), .fix_chip(fix_chip));

  int seen [3];

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    burst_t      bu, t;
    ref_result_t r;
    chip_vec_t   exp_match;
    int          c0, c1, kind;
    for (int n = 0; n < 600; n++) begin
      bu = ref_encode(rand_line(), meta_t'($urandom()));
      kind = n % 6;
      c0 = $urandom_range(0, 9);
      case (kind)
        0: ;
        1: bu[c0] ^= bounded_fault();
        2: bu[c0] ^= any_fault();
        3: bu[8 + (n / 6) % 2] ^= meta_alias($urandom_range(0, 15));
        4: begin
          do c1 = $urandom_range(0, 9); while (c1 == c0);
          bu[c0] ^= any_fault();
          bu[c1] ^= any_fault();
        end
        default: begin
          // aligned pair on two chips: cancels in parity, must still be caught
          do c1 = $urandom_range(0, 9); while (c1 == c0);
          begin
            chip_t e = nbit_fault($urandom_range(1, 4));
            bu[c0] ^= e;
            bu[c1] ^= e;
          end
        end
      endcase
      psyn = ref_psyn(bu);
      ssyn = ref_ssyn(bu);
      #1;
      r = ref_decode(bu);
      for (int c = 0; c < 10; c++) begin
        t = bu;
        t[c] ^= psyn;
        exp_match[c] = ref_ok(t);
      end
      seen[int'(r.status)]++;
      checks += 3;
      if (match !== exp_match) begin failures++; $display("FAIL n=%0d match %b exp %b", n, match, exp_match); end
      if (status !== r.status) begin failures++; $display("FAIL n=%0d status %0d exp %0d", n, status, r.status); end
      if (fix_chip !== chip_idx_t'(r.fix < 0 ? 0 : r.fix)) begin failures++; $display("FAIL n=%0d fix %0d exp %0d", n, fix_chip, r.fix); end
      // the method's guarantees for these fault classes
      checks++;
      if ((kind == 1 || kind == 2) && status != CG_CORRECTED) begin failures++; $display("FAIL n=%0d single-chip fault not corrected", n); end
      if ((kind == 3 || kind >= 4) && status != CG_UNCORRECTABLE) begin failures++; $display("FAIL n=%0d not flagged", n); end
    end
    $display("clean=%0d corrected=%0d uncorrectable=%0d", seen[0], seen[1], seen[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
