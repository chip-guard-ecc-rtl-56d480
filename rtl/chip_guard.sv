// chip_guard -- Chip Guard ECC for one DDR5 sub-channel (top level).
//
// Store path: st_data (512 bits) and st_meta (16 metabits) are encoded by
// cg_encoder into a 10-chip burst (8 data chips, the metadata/signature chip,
// the parity chip) and presented on st_burst one clock after st_valid.
// Load path: a burst read from the DIMM on ld_burst is checked and corrected
// by cg_decoder; data, metabits, a status (clean / corrected /
// uncorrectable), the corrected chip and the candidate-match vector appear
// one clock after ld_valid.
//
// Both paths have a fixed latency of one clock, the same whether or not a
// correction is made, and accept a new burst every clock. The single output
// register on each path is this design's choice for the pipeline latching the
// method leaves to the memory interface. Only the valid flags are reset
// (active-low synchronous rst_n); data registers load when their valid is high.
module chip_guard
  import cg_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // store
  input  logic       st_valid,
  input  line_t      st_data,
  input  meta_t      st_meta,
  output logic       st_burst_valid,
  output burst_t     st_burst,
  // load
  input  logic       ld_valid,
  input  burst_t     ld_burst,
  output logic       ld_out_valid,
  output line_t      ld_data,
  output meta_t      ld_meta,
  output cg_status_e ld_status,
  output chip_idx_t  ld_fix_chip,
  output chip_vec_t  ld_match
);

  burst_t     enc_burst;
  line_t      dec_data;
  meta_t      dec_meta;
  cg_status_e dec_status;
  chip_idx_t  dec_fix;
  chip_vec_t  dec_match;

  cg_encoder u_encoder (
    .data (st_data),
    .meta (st_meta),
    .burst(enc_burst)
  );

  cg_decoder u_decoder (
    .burst   (ld_burst),
    .data    (dec_data),
    .meta    (dec_meta),
    .status  (dec_status),
    .fix_chip(dec_fix),
    .match   (dec_match)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st_burst_valid <= 1'b0;
      ld_out_valid   <= 1'b0;
    end else begin
      st_burst_valid <= st_valid;
      ld_out_valid   <= ld_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (st_valid) st_burst <= enc_burst;
    if (ld_valid) begin
      ld_data     <= dec_data;
      ld_meta     <= dec_meta;
      ld_status   <= dec_status;
      ld_fix_chip <= dec_fix;
      ld_match    <= dec_match;
    end
  end

  // A correction names exactly one candidate chip.
  always_ff @(posedge clk) begin
    if (rst_n && ld_valid) begin
      assert (dec_status != CG_CORRECTED || $onehot(dec_match))
        else $error("correction without a unique candidate");
      assert (dec_status != CG_CLEAN || dec_match[PARITY_CHIP])
        else $error("clean burst with nonzero signature syndrome");
    end
  end

endmodule
