// tb_cg_encoder -- self-checking test of the store path.
//
// Random data and metabits (plus all-zero and all-one corner cases); the
// burst is compared chip by chip with the reference encoder, and the written
// burst must decode as clean with zero parity and signature syndromes.
module tb_cg_encoder;
  import cg_pkg::*;
  import tb_cg_ref_pkg::*;

  int checks = 0, failures = 0;

  line_t  data;
  meta_t  meta;
  burst_t burst;

  cg_encoder dut (.data(data), .meta(meta), .burst(burst));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    burst_t exp;
    for (int t = 0; t < 400; t++) begin
      case (t)
        0: begin data = '0; meta = '0; end
        1: begin data = '1; meta = '1; end
        default: begin data = rand_line(); meta = meta_t'($urandom()); end
      endcase
      #1;
      exp = ref_encode(data, meta);
      for (int c = 0; c < 10; c++) begin
        checks++;
        if (burst[c] !== exp[c]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d chip %0d: %h exp %h", t, c, burst[c], exp[c]);
        end
      end
      checks++;
      if (!ref_ok(burst) || ref_meta(burst[8]) !== meta) begin
        failures++;
        $display("FAIL t=%0d burst does not check", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
