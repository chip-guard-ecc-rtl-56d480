// cg_pkg -- shared constants, types and the signature map of the Chip Guard ECC.
//
// Chip Guard protects one DDR5 sub-channel burst: 10 x4 chips, each delivering
// 64 bits per burst (16 beats x 4 DQ). Chips 0..7 carry 512 data bits, chip 8
// carries 16 metabits interleaved with a 48-bit signature, chip 9 carries the
// bitwise ("sideways") parity of chips 0..8. These sizes are the ones of the
// main configuration of the method.
//
// The signature is the XOR of one mask per source bit. Every data bit
// (chip 0..7) owns a mask with 8 of the 48 signature bits set, every metabit
// owns a mask with 19 set. The method picks these masks pseudo-randomly and
// then vets them by exhaustive alias searches; the vetted table is not
// published, so here the table is generated by gen_sig_map() below from an
// xorshift32 generator seeded with MAP_SEED, rejecting repeated bit positions
// within a mask. The result is deterministic; the testbench of cg_chip_sig
// checks that every data mask is distinct, as the method requires. Changing
// MAP_SEED gives a different, equally valid, table.
//
// Bit placement inside chip 8 (an assumption; the method only says the
// metabits are interleaved with the signature bits): metabit i sits at chip
// bit i*META_STRIDE, the signature bits fill the other positions in order.
// Chip bit b is taken to be beat b/4, DQ b%4.
package cg_pkg;

  parameter int unsigned CHIP_BITS   = 64;  // bits per chip per burst
  parameter int unsigned DATA_CHIPS  = 8;
  parameter int unsigned N_CHIPS     = 10;
  parameter int unsigned META_CHIP   = 8;   // metadata + signature chip
  parameter int unsigned PARITY_CHIP = 9;
  parameter int unsigned META_BITS   = 16;
  parameter int unsigned SIG_BITS    = CHIP_BITS - META_BITS;  // 48
  parameter int unsigned DATA_WEIGHT = 8;   // signature bits per data bit
  parameter int unsigned META_WEIGHT = 19;  // signature bits per metabit
  parameter int unsigned META_STRIDE = CHIP_BITS / META_BITS;
  parameter logic [31:0] MAP_SEED    = 32'h2545_F491;

  typedef logic [CHIP_BITS-1:0]       chip_t;
  typedef chip_t [N_CHIPS-1:0]        burst_t;   // burst[c] = chip c
  typedef chip_t [DATA_CHIPS-1:0]     line_t;    // 512 data bits
  typedef logic [META_BITS-1:0]       meta_t;
  typedef logic [SIG_BITS-1:0]        sig_t;
  typedef logic [$clog2(N_CHIPS)-1:0] chip_idx_t;
  typedef logic [N_CHIPS-1:0]         chip_vec_t;

  typedef enum logic [1:0] {
    CG_CLEAN         = 2'd0,  // parity and signature both match
    CG_CORRECTED     = 2'd1,  // exactly one chip explains the fault
    CG_UNCORRECTABLE = 2'd2   // no chip, or more than one, explains it
  } cg_status_e;

  // sig_map[c][b]: mask of source bit b of chip c (c = 0..8). Rows of chip 8
  // above META_BITS are zero.
  typedef sig_t [CHIP_BITS-1:0]  chip_map_t;
  typedef chip_map_t [DATA_CHIPS:0] sig_map_t;

  function automatic logic [31:0] xorshift32(input logic [31:0] s);
    logic [31:0] x;
    x = s;
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  function automatic sig_map_t gen_sig_map(input logic [31:0] seed);
    sig_map_t    m;
    logic [31:0] x;
    int unsigned w, cnt, pos;
    x = seed;
    for (int c = 0; c <= int'(DATA_CHIPS); c++) begin
      for (int b = 0; b < int'(CHIP_BITS); b++) begin
        m[c][b] = '0;
        if (c != int'(META_CHIP) || b < int'(META_BITS)) begin
          w   = (c == int'(META_CHIP)) ? META_WEIGHT : DATA_WEIGHT;
          cnt = 0;
          while (cnt < w) begin
            x   = xorshift32(x);
            pos = 32'(x[31:8]) % SIG_BITS;
            if (!m[c][b][pos]) begin
              m[c][b][pos] = 1'b1;
              cnt++;
            end
          end
        end
      end
    end
    return m;
  endfunction

  parameter sig_map_t SIG_MAP = gen_sig_map(MAP_SEED);

  // Chip-8 layout helpers.
  function automatic bit is_meta_pos(input int unsigned b);
    return (b % META_STRIDE) == 0;
  endfunction

  function automatic meta_t meta_of(input chip_t w);
    meta_t m;
    for (int i = 0; i < int'(META_BITS); i++) m[i] = w[i*META_STRIDE];
    return m;
  endfunction

  function automatic sig_t sig_of(input chip_t w);
    sig_t s;
    int unsigned j;
    s = '0;
    j = 0;
    for (int b = 0; b < int'(CHIP_BITS); b++) begin
      if (!is_meta_pos(b)) begin
        s[j] = w[b];
        j++;
      end
    end
    return s;
  endfunction

  function automatic chip_t pack_meta_chip(input meta_t m, input sig_t s);
    chip_t w;
    int unsigned j;
    j = 0;
    for (int b = 0; b < int'(CHIP_BITS); b++) begin
      if (is_meta_pos(b)) begin
        w[b] = m[b/META_STRIDE];
      end else begin
        w[b] = s[j];
        j++;
      end
    end
    return w;
  endfunction

endpackage
