// cg_encoder -- Chip Guard store path.
//
// Builds the 10-chip burst written to the DIMM from 512 data bits and 16
// metabits:
//   chips 0..7 : data[c], unchanged
//   chip  8    : the metabits interleaved with the 48-bit signature, which is
//                the XOR of the partial signatures of chips 0..7 and of the
//                metabits (cg_chip_sig)
//   chip  9    : sideways parity of chips 0..8 (cg_parity, N = 9)
// The placement of metabits within chip 8 is set by cg_pkg::pack_meta_chip.
// The code is systematic: chips 0..7 and the metabit positions of chip 8 are
// the inputs wired straight through, so a synthesis report lists them as
// outputs driven by inputs. Purely combinational; the top module registers
// its output.
module cg_encoder
  import cg_pkg::*;
(
  input  line_t  data,
  input  meta_t  meta,
  output burst_t burst
);

  sig_t  part [DATA_CHIPS+1];
  sig_t  sig;
  chip_t meta_chip;
  chip_t par;

  for (genvar c = 0; c < DATA_CHIPS; c++) begin : g_data_sig
    cg_chip_sig #(.CHIP(c)) u_sig (.bits(data[c]), .sig(part[c]));
  end
  cg_chip_sig #(.CHIP(META_CHIP)) u_meta_sig (.bits(meta), .sig(part[META_CHIP]));

  always_comb begin
    sig = '0;
    for (int c = 0; c <= int'(DATA_CHIPS); c++) sig = sig ^ part[c];
    meta_chip = pack_meta_chip(meta, sig);
  end

  cg_parity #(.N(DATA_CHIPS + 1)) u_parity (
    .chips ({meta_chip, data}),
    .parity(par)
  );

  assign burst = {par, meta_chip, data};

endmodule
