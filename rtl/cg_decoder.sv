// cg_decoder -- Chip Guard load path.
//
// Checks and, where possible, corrects one burst read from the DIMM:
//   1. psyn = sideways parity of all 10 chips (cg_parity, N = 10);
//   2. ssyn = signature of chips 0..7 and of the metabits of chip 8, XOR the
//      signature stored in chip 8;
//   3. cg_locator tests the 10 erasure candidates;
//   4. on CG_CORRECTED the chip fix_chip is XORed with psyn. A parity-chip
//      correction leaves data and metabits as read.
// On CG_UNCORRECTABLE the data and metabits are passed as read (an assumption:
// the method only requires that the fault be reported). The path is the same
// whether or not a correction is made. Purely combinational.
module cg_decoder
  import cg_pkg::*;
(
  input  burst_t     burst,
  output line_t      data,
  output meta_t      meta,
  output cg_status_e status,
  output chip_idx_t  fix_chip,
  output chip_vec_t  match
);

  chip_t  psyn;
  sig_t   part [DATA_CHIPS+1];
  sig_t   ssyn;
  burst_t fixed;

  cg_parity #(.N(N_CHIPS)) u_parity (.chips(burst), .parity(psyn));

  for (genvar c = 0; c < DATA_CHIPS; c++) begin : g_sig
    cg_chip_sig #(.CHIP(c)) u_sig (.bits(burst[c]), .sig(part[c]));
  end
  cg_chip_sig #(.CHIP(META_CHIP)) u_meta_sig (
    .bits(meta_of(burst[META_CHIP])), .sig(part[META_CHIP])
  );

  always_comb begin
    ssyn = sig_of(burst[META_CHIP]);
    for (int c = 0; c <= int'(DATA_CHIPS); c++) ssyn = ssyn ^ part[c];
  end

  cg_locator u_locator (
    .psyn    (psyn),
    .ssyn    (ssyn),
    .match   (match),
    .status  (status),
    .fix_chip(fix_chip)
  );

  always_comb begin
    for (int c = 0; c < int'(N_CHIPS); c++) begin
      fixed[c] = burst[c];
      if (status == CG_CORRECTED && fix_chip == chip_idx_t'(c)) fixed[c] = burst[c] ^ psyn;
    end
    for (int c = 0; c < int'(DATA_CHIPS); c++) data[c] = fixed[c];
    meta = meta_of(fixed[META_CHIP]);
  end

endmodule
