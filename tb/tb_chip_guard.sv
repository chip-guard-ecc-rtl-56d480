// tb_chip_guard -- end-to-end test of the Chip Guard top at its default sizes.
//
// Each clock a new line (512 data bits + 16 metabits) may be stored; the burst
// the top produces one clock later stands in for the DRAM: a fault from the
// current scenario is XORed into it and it is sent straight back into the
// load port, so stores and loads stream back to back with random bubbles.
// Scenarios: no fault; a bounded 2-DQ fault, a few-bit fault or an arbitrary
// fault on any chip (data chips, the metadata/signature chip and the parity
// chip); the metabit alias pattern on chip 8 or 9 (two candidates ->
// uncorrectable); faults on two chips and aligned bit pairs on two chips
// (no candidate -> uncorrectable).
// Checks: the written burst against the reference encoder; load results
// against the reference decoder and, for single-chip faults, against the data
// written; both paths have a fixed latency of exactly one clock. Each
// mechanism (clean pass, correction of every chip, parity self-correction,
// bounded-fault correction, ambiguous alias, no-candidate detection,
// back-to-back transfers) must occur at least once.
module tb_chip_guard;
  import cg_pkg::*;
  import tb_cg_ref_pkg::*;

  localparam int N_ITEMS = 2000;

  int checks = 0, failures = 0;

  logic       clk = 1'b0;
  logic       rst_n;
  logic       st_valid;
  line_t      st_data;
  meta_t      st_meta;
  logic       st_burst_valid;
  burst_t     st_burst;
  logic       ld_valid;
  burst_t     ld_burst;
  logic       ld_out_valid;
  line_t      ld_data;
  meta_t      ld_meta;
  cg_status_e ld_status;
  chip_idx_t  ld_fix_chip;
  chip_vec_t  ld_match;

  chip_guard dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    line_t d;
    meta_t m;
    int    kind;   // fault scenario
    int    chip;
  } item_t;

  // mechanism counters
  int n_clean, n_bounded_fix, n_parity_fix, n_alias, n_nocand, n_b2b;
  int n_fix [10];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin : watchdog
    repeat (20 * N_ITEMS + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic item_t new_item(input int n);
    item_t it;
    it.d = rand_line();
    it.m = meta_t'($urandom());
    it.kind = n % 9;
    it.chip = $urandom_range(0, 9);
    return it;
  endfunction

  function automatic burst_t inject(input burst_t bu, input item_t it);
    burst_t t = bu;
    int     c1;
    case (it.kind)
      0: ;
      1, 2: t[it.chip] ^= bounded_fault();
      3: t[it.chip] ^= nbit_fault($urandom_range(1, 10));
      4: t[it.chip] ^= any_fault();
      5: t[8 + $urandom_range(0, 1)] ^= meta_alias($urandom_range(0, 15));
      6: begin
        do c1 = $urandom_range(0, 9); while (c1 == it.chip);
        t[it.chip] ^= any_fault();
        t[c1] ^= any_fault();
      end
      7: begin
        chip_t e = nbit_fault($urandom_range(1, 5));
        do c1 = $urandom_range(0, 9); while (c1 == it.chip);
        t[it.chip] ^= e;
        t[c1] ^= e;
      end
      default: t[9] ^= any_fault();  // parity chip alone
    endcase
    return t;
  endfunction

  initial begin
    item_t       st_q [$];   // stored last cycle, burst due now
    item_t       ld_q [$];   // loaded last cycle, result due now
    burst_t      ld_sent [$];
    item_t       it;
    burst_t      sent;
    ref_result_t r;
    int          issued = 0, retired = 0;
    bit          prev_st = 0;

    rst_n = 1'b0;
    st_valid = 1'b0;
    ld_valid = 1'b0;
    st_data = '0;
    st_meta = '0;
    ld_burst = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    check(!st_burst_valid && !ld_out_valid, "valids low after reset");

    while (retired < N_ITEMS) begin
      // results of the load issued one clock ago
      check(ld_out_valid == (ld_q.size() != 0), "load latency is one clock");
      if (ld_q.size() != 0) begin
        it = ld_q.pop_front();
        sent = ld_sent.pop_front();
        r = ref_decode(sent);
        check(ld_status === r.status, $sformatf("status %0d exp %0d (kind %0d)", ld_status, r.status, it.kind));
        check(ld_data === r.data && ld_meta === r.meta, "load data vs reference");
        if (r.status == CG_CORRECTED)
          check(ld_fix_chip === chip_idx_t'(r.fix), "fixed chip");
        if (it.kind <= 4 || it.kind == 8) begin
          check(ld_data === it.d && ld_meta === it.m, $sformatf("single-chip fault kind %0d chip %0d not restored", it.kind, it.chip));
        end else begin
          check(ld_status == CG_UNCORRECTABLE, $sformatf("kind %0d not flagged", it.kind));
        end
        case (ld_status)
          CG_CLEAN: n_clean++;
          CG_CORRECTED: begin
            n_fix[ld_fix_chip]++;
            if (ld_fix_chip == chip_idx_t'(PARITY_CHIP)) n_parity_fix++;
            if (it.kind == 1 || it.kind == 2) n_bounded_fix++;
          end
          default: begin
            if ($countones(ld_match) >= 2) n_alias++;
            if (ld_match == '0) n_nocand++;
          end
        endcase
        retired++;
      end

      // burst of the store issued one clock ago -> fault -> load port
      check(st_burst_valid == (st_q.size() != 0), "store latency is one clock");
      ld_valid = 1'b0;
      if (st_q.size() != 0) begin
        it = st_q.pop_front();
        check(st_burst === ref_encode(it.d, it.m), "stored burst vs reference");
        sent = inject(st_burst, it);
        ld_burst = sent;
        ld_valid = 1'b1;
        ld_q.push_back(it);
        ld_sent.push_back(sent);
      end else begin
        ld_burst = inject(st_burst, new_item(4));  // garbage while idle
      end

      // next store, with random bubbles
      st_valid = 1'b0;
      if (issued < N_ITEMS && $urandom_range(0, 3) != 0) begin
        it = new_item(issued);
        st_data = it.d;
        st_meta = it.m;
        st_valid = 1'b1;
        st_q.push_back(it);
        issued++;
        if (prev_st) n_b2b++;
      end else begin
        st_data = rand_line();  // must not be taken
      end
      prev_st = st_valid;
      @(negedge clk);
    end

    $display("clean=%0d bounded_fix=%0d parity_fix=%0d alias=%0d no_candidate=%0d back_to_back=%0d",
             n_clean, n_bounded_fix, n_parity_fix, n_alias, n_nocand, n_b2b);
    check(n_clean > 0, "clean pass never happened");
    check(n_bounded_fix > 0, "bounded-fault correction never happened");
    check(n_parity_fix > 0, "parity self-correction never happened");
    check(n_alias > 0, "ambiguous alias never happened");
    check(n_nocand > 0, "no-candidate detection never happened");
    check(n_b2b > 0, "back-to-back transfers never happened");
    for (int c = 0; c < 10; c++) check(n_fix[c] > 0, $sformatf("chip %0d never corrected", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
