// diva_shuffle: DIVA Shuffling, the design-induced-variation-aware data mapping
// between ECC codewords and the chips' burst positions.
//
// Within every chip the bits that fail first at reduced latency sit at the same
// few positions of the chip's 64-bit burst (they come from the slowest mats and
// columns), and every chip of a DIMM has the same design. With the
// conventional mapping, beat b of every chip belongs to codeword b, so one slow
// beat position puts an error into the same codeword from all eight chips and
// SECDED cannot correct it. This block rotates each chip's share of the
// codewords: the byte of codeword b carried by lane (chip) c is sent in the
// chip's burst beat (b + ROT_STEP*c) mod 8. With ROT_STEP = 1 the eight chips'
// copies of one slow beat land in eight different codewords, one bit each,
// which SECDED corrects.
//
// Write direction: wr_cw (eight 72-bit codewords, codeword b at bits
// [72b +: 72], lane c = bits [8c +: 8] of it) -> wr_dram (burst beat k at bits
// [72k +: 72], lane c at bits [8c +: 8] of it). Read direction: rd_dram ->
// rd_cw, the inverse permutation. Lane 8 is the ECC chip; it is rotated by
// 8*ROT_STEP mod 8, i.e. not at all for ROT_STEP = 1. Pure wiring, no clock.
//
// The paper realises the same permutation either inside the DRAM chips (a
// different data-out order per chip) or by wiring the column address bits of
// each chip in a different order. Doing it as a byte-lane rotation in the
// controller's data path, and the rotation by chip index, are this design's
// choices; the paper's figure shows only that the slow positions end up spread
// over different bursts. ROT_STEP = 0 gives the conventional mapping.
module diva_shuffle
  import diva_pkg::*;
#(
  parameter int unsigned ROT_STEP = 1
) (
  input  logic [CODED_LINE_W-1:0] wr_cw,
  output logic [CODED_LINE_W-1:0] wr_dram,
  input  logic [CODED_LINE_W-1:0] rd_dram,
  output logic [CODED_LINE_W-1:0] rd_cw
);

  function automatic int unsigned beat_of(int unsigned b, int unsigned c);
    return (b + ROT_STEP * c) % BEATS;
  endfunction

  always_comb begin
    for (int unsigned b = 0; b < BEATS; b++) begin
      for (int unsigned c = 0; c < LANES; c++) begin
        wr_dram[beat_of(b, c)*CW_W + c*8 +: 8] = wr_cw[b*CW_W + c*8 +: 8];
        rd_cw[b*CW_W + c*8 +: 8]               = rd_dram[beat_of(b, c)*CW_W + c*8 +: 8];
      end
    end
  end

endmodule
