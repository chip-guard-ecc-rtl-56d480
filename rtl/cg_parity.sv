// cg_parity -- sideways parity of N chip words.
//
// Parity(b) = XOR over chips c of B(c,b). With N = 9 (chips 0..8) it gives the
// word stored in the parity chip; with N = 10 (all chips as read) it gives the
// parity syndrome, which for a single-chip fault equals the flipped bits of
// that chip. Purely combinational.
module cg_parity
  import cg_pkg::*;
#(
  parameter int unsigned N = 9
) (
  input  chip_t [N-1:0] chips,
  output chip_t         parity
);

  always_comb begin
    parity = '0;
    for (int unsigned c = 0; c < N; c++) parity = parity ^ chips[c];
  end

endmodule
