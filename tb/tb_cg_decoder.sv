// tb_cg_decoder -- self-checking test of the load path.
//
// Every chip in turn gets bounded (2-DQ), few-bit and arbitrary faults; the
// metabit alias patterns go to chips 8 and 9; two-chip faults and aligned
// bit pairs are injected as well. Outputs are compared with the reference
// decoder, and for single-chip faults the data and metabits must equal what
// was written.
module tb_cg_decoder;
  import cg_pkg::*;
  import tb_cg_ref_pkg::*;

  int checks = 0, failures = 0;

  burst_t     burst;
  line_t      data;
  meta_t      meta;
  cg_status_e status;
  chip_idx_t  fix_chip;
  chip_vec_t  match;

  cg_decoder dut (.burst(burst), .data(data), .meta(meta), .status(status),
                  .fix_chip(fix_chip), .match(match));

  int n_fixed [10];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
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
    line_t       d;
    meta_t       m;
    burst_t      bu;
    ref_result_t r;
    int          kind, c0, c1;
    for (int n = 0; n < 800; n++) begin
      d = rand_line();
      m = meta_t'($urandom());
      bu = ref_encode(d, m);
      kind = n % 8;
      c0 = n % 10;
      case (kind)
        0: ;
        1, 2: bu[c0] ^= bounded_fault();
        3: bu[c0] ^= nbit_fault($urandom_range(1, 10));
        4: bu[c0] ^= any_fault();
        5: bu[8 + (n / 8) % 2] ^= meta_alias($urandom_range(0, 15));
        6: begin
          do c1 = $urandom_range(0, 9); while (c1 == c0);
          bu[c0] ^= any_fault();
          bu[c1] ^= any_fault();
        end
        default: begin
          chip_t e = nbit_fault($urandom_range(1, 5));
          do c1 = $urandom_range(0, 9); while (c1 == c0);
          bu[c0] ^= e;
          bu[c1] ^= e;
        end
      endcase
      burst = bu;
      #1;
      r = ref_decode(bu);
      check(status === r.status, $sformatf("n=%0d status %0d exp %0d", n, status, r.status));
      check(fix_chip === chip_idx_t'(r.fix < 0 ? 0 : r.fix), $sformatf("n=%0d fix %0d exp %0d", n, fix_chip, r.fix));
      check(data === r.data, $sformatf("n=%0d data", n));
      check(meta === r.meta, $sformatf("n=%0d meta", n));
      if (kind <= 4) begin
        check(data === d && meta === m, $sformatf("n=%0d kind %0d chip %0d: not restored", n, kind, c0));
        check(status == (kind == 0 ? CG_CLEAN : CG_CORRECTED), $sformatf("n=%0d status class", n));
      end else begin
        check(status == CG_UNCORRECTABLE, $sformatf("n=%0d multi-chip/alias not flagged", n));
      end
      if (status == CG_CORRECTED) n_fixed[fix_chip]++;
    end
    for (int c = 0; c < 10; c++) check(n_fixed[c] > 0, $sformatf("chip %0d never corrected", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
