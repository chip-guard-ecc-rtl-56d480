// tb_cg_parity -- self-checking test of the sideways parity for N = 9 and N = 10.
//
// Random chip words; the expected parity bit b is the count of ones of bit b
// over the chips, modulo 2, worked out bit by bit.
module tb_cg_parity;
  import cg_pkg::*;

  int checks = 0, failures = 0;

  chip_t [8:0] c9;
  chip_t [9:0] c10;
  chip_t       p9, p10;

  cg_parity #(.N(9))  u9  (.chips(c9),  .parity(p9));
  cg_parity #(.N(10)) u10 (.chips(c10), .parity(p10));

  function automatic chip_t expect_par(input chip_t [9:0] w, input int n);
    chip_t p;
    for (int b = 0; b < 64; b++) begin
      int ones = 0;
      for (int c = 0; c < n; c++) ones += int'(w[c][b]);
      p[b] = ones[0];
    end
    return p;
  endfunction

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chip_t [9:0] w;
    for (int t = 0; t < 500; t++) begin
      for (int c = 0; c < 10; c++) w[c] = {$urandom(), $urandom()};
      if (t < 10) for (int c = 0; c < 10; c++) w[c] = (c == t) ? '1 : '0;
      c10 = w;
      for (int c = 0; c < 9; c++) c9[c] = w[c];
      #1;
      checks += 2;
      if (p9 !== expect_par(w, 9)) begin failures++; $display("FAIL N=9 t=%0d", t); end
      if (p10 !== expect_par(w, 10)) begin failures++; $display("FAIL N=10 t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
