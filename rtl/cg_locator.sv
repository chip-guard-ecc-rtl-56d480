// cg_locator -- Chip Guard erasure search.
//
// Given the parity syndrome psyn (XOR of all 10 chips as read) and the
// signature syndrome ssyn (signature recomputed from chips 0..8 XOR the
// signature stored in chip 8), it tries the 10 possible erasure locations at
// once. Flipping chip c by psyn changes the recomputed signature by the
// partial signature of psyn in chip c's map, so candidate c fixes the burst
// when
//   chips 0..7 : ssyn == Sig_c(psyn)
//   chip  8    : ssyn == Sig_8(metabits of psyn) ^ (signature bits of psyn)
//                (both the metabits and the stored signature are flipped)
//   chip  9    : ssyn == 0 (the parity chip does not enter the signature)
// Decision: psyn and ssyn both zero -> CG_CLEAN; exactly one candidate ->
// CG_CORRECTED with fix_chip set to it; none or two or more -> CG_UNCORRECTABLE.
// fix_chip is 0 unless the status is CG_CORRECTED. Purely combinational.
module cg_locator
  import cg_pkg::*;
(
  input  chip_t      psyn,
  input  sig_t       ssyn,
  output chip_vec_t  match,
  output cg_status_e status,
  output chip_idx_t  fix_chip
);

  sig_t cand [DATA_CHIPS+1];

  for (genvar c = 0; c < DATA_CHIPS; c++) begin : g_cand
    cg_chip_sig #(.CHIP(c)) u_sig (.bits(psyn), .sig(cand[c]));
  end
  cg_chip_sig #(.CHIP(META_CHIP)) u_meta_sig (.bits(meta_of(psyn)), .sig(cand[META_CHIP]));

  int unsigned n_match;

  always_comb begin
    for (int c = 0; c < int'(DATA_CHIPS); c++) match[c] = (ssyn == cand[c]);
    match[META_CHIP]   = (ssyn == (cand[META_CHIP] ^ sig_of(psyn)));
    match[PARITY_CHIP] = (ssyn == '0);

    n_match  = 0;
    fix_chip = '0;
    for (int c = 0; c < int'(N_CHIPS); c++) begin
      if (match[c]) begin
        n_match  = n_match + 1;
        fix_chip = chip_idx_t'(c);
      end
    end

    if (psyn == '0 && ssyn == '0) begin
      status   = CG_CLEAN;
      fix_chip = '0;
    end else if (n_match == 1) begin
      status   = CG_CORRECTED;
    end else begin
      status   = CG_UNCORRECTABLE;
      fix_chip = '0;
    end
  end

endmodule
