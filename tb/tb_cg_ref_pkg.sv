// tb_cg_ref_pkg -- behavioural reference model of Chip Guard for the testbenches.
//
// Written independently of the RTL's structure: the signature of a burst is
// recomputed from scratch bit by bit, the chip-8 layout is re-derived here
// (metabit i at chip bit 4*i), and decoding follows the method literally:
// if parity and signature both check, the burst is clean; otherwise each of
// the 10 chips in turn is flipped by the parity syndrome and the whole burst
// re-checked, and the correction is accepted only if exactly one trial
// checks. Only the signature mask table cg_pkg::SIG_MAP is shared with the
// RTL, since it is the code's definition. Also holds fault-pattern helpers.
package tb_cg_ref_pkg;
  import cg_pkg::*;

  localparam int unsigned DQ = 4;  // x4 chips: chip bit b is beat b/4, DQ b%4

  typedef struct {
    cg_status_e  status;
    int          fix;       // corrected chip, -1 if none
    int          n_match;
    line_t       data;
    meta_t       meta;
  } ref_result_t;

  function automatic meta_t ref_meta(input chip_t w);
    meta_t m;
    for (int i = 0; i < 16; i++) m[i] = w[4*i];
    return m;
  endfunction

  function automatic sig_t ref_stored_sig(input chip_t w);
    sig_t s;
    int j = 0;
    s = '0;
    for (int b = 0; b < 64; b++) if (b % 4 != 0) begin s[j] = w[b]; j++; end
    return s;
  endfunction

  function automatic chip_t ref_chip8(input meta_t m, input sig_t s);
    chip_t w;
    int j = 0;
    for (int b = 0; b < 64; b++) begin
      if (b % 4 == 0) w[b] = m[b/4];
      else begin w[b] = s[j]; j++; end
    end
    return w;
  endfunction

  function automatic sig_t ref_sig(input line_t d, input meta_t m);
    sig_t s = '0;
    for (int c = 0; c < 8; c++)
      for (int b = 0; b < 64; b++)
        if (d[c][b]) s ^= SIG_MAP[c][b];
    for (int i = 0; i < 16; i++) if (m[i]) s ^= SIG_MAP[8][i];
    return s;
  endfunction

  function automatic burst_t ref_encode(input line_t d, input meta_t m);
    burst_t bu;
    chip_t  p = '0;
    for (int c = 0; c < 8; c++) bu[c] = d[c];
    bu[8] = ref_chip8(m, ref_sig(d, m));
    for (int c = 0; c < 9; c++) p ^= bu[c];
    bu[9] = p;
    return bu;
  endfunction

  function automatic chip_t ref_psyn(input burst_t bu);
    chip_t p = '0;
    for (int c = 0; c < 10; c++) p ^= bu[c];
    return p;
  endfunction

  function automatic line_t ref_data(input burst_t bu);
    line_t d;
    for (int c = 0; c < 8; c++) d[c] = bu[c];
    return d;
  endfunction

  function automatic sig_t ref_ssyn(input burst_t bu);
    return ref_sig(ref_data(bu), ref_meta(bu[8])) ^ ref_stored_sig(bu[8]);
  endfunction

  function automatic bit ref_ok(input burst_t bu);
    return (ref_psyn(bu) == '0) && (ref_ssyn(bu) == '0);
  endfunction

  function automatic ref_result_t ref_decode(input burst_t bu);
    ref_result_t r;
    burst_t      t;
    chip_t       p;
    r.fix = -1;
    r.n_match = 0;
    r.data = ref_data(bu);
    r.meta = ref_meta(bu[8]);
    if (ref_ok(bu)) begin
      r.status = CG_CLEAN;
      return r;
    end
    p = ref_psyn(bu);
    for (int c = 0; c < 10; c++) begin
      t = bu;
      t[c] ^= p;
      if (ref_ok(t)) begin
        r.n_match++;
        r.fix = c;
      end
    end
    if (r.n_match == 1) begin
      r.status = CG_CORRECTED;
      t = bu;
      t[r.fix] ^= p;
      r.data = ref_data(t);
      r.meta = ref_meta(t[8]);
    end else begin
      r.status = CG_UNCORRECTABLE;
      r.fix = -1;
    end
    return r;
  endfunction

  function automatic chip_t rand_chip();
    return {$urandom(), $urandom()};
  endfunction

  function automatic line_t rand_line();
    line_t d;
    for (int c = 0; c < 8; c++) d[c] = rand_chip();
    return d;
  endfunction

  // Nonzero flips confined to two DQs of a chip (a bounded fault).
  function automatic chip_t bounded_fault();
    chip_t e, mask;
    int    dq0, dq1;
    dq0 = $urandom_range(0, 3);
    do dq1 = $urandom_range(0, 3); while (dq1 == dq0);
    mask = '0;
    for (int b = 0; b < 64; b++) if (b % DQ == dq0 || b % DQ == dq1) mask[b] = 1'b1;
    do e = rand_chip() & mask; while (e == '0);
    return e;
  endfunction

  // Nonzero flips of n random bits of a chip.
  function automatic chip_t nbit_fault(input int n);
    chip_t e = '0;
    while ($countones(e) < n) e[$urandom_range(0, 63)] = 1'b1;
    return e;
  endfunction

  // Arbitrary nonzero chip fault.
  function automatic chip_t any_fault();
    chip_t e;
    do e = rand_chip(); while (e == '0);
    return e;
  endfunction

  // Flip pattern that aliases chip 8 with chip 9: metabit i and its 19
  // signature bits.
  function automatic chip_t meta_alias(input int i);
    meta_t m = '0;
    m[i] = 1'b1;
    return ref_chip8(m, SIG_MAP[8][i]);
  endfunction
endpackage
