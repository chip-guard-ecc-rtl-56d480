// cg_chip_sig -- partial signature of one chip.
//
// The Chip Guard signature is separable: the signature of a whole burst is the
// XOR of the signatures of its chips, and each of those is the XOR of the
// masks cg_pkg::SIG_MAP[CHIP][b] of the set bits b. This module forms one
// chip's share. Because the map is fixed, each output bit reduces to an XOR
// tree over the source bits whose mask contains that signature bit (about
// 85 data bits per signature bit, i.e. about 7 XOR2 levels).
//
// The same module serves the store path (signature of the data and metabits),
// the load path (signature recomputed from what was read) and the corrector
// (signature of the parity syndrome as if applied to chip CHIP).
//
// Interface: CHIP selects the row of the map (0..7 data chips, 8 the metabits).
// bits is 64 wide for a data chip and META_BITS wide for CHIP = 8.
// Purely combinational.
module cg_chip_sig
  import cg_pkg::*;
#(
  parameter int unsigned CHIP    = 0,
  parameter int unsigned IN_BITS = (CHIP == META_CHIP) ? META_BITS : CHIP_BITS
) (
  input  logic [IN_BITS-1:0] bits,
  output sig_t               sig
);

  always_comb begin
    sig = '0;
    for (int unsigned b = 0; b < IN_BITS; b++) begin
      sig = sig ^ ({SIG_BITS{bits[b]}} & SIG_MAP[CHIP][b]);
    end
  end

endmodule
