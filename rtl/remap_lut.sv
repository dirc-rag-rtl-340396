// remap_lut - error-aware bitwise address LUT of a DIRC column.
//
// Maps (precision, embedding slot, data bit) to the device of the 8x8 ReRAM
// subarray that holds the bit and to whether it is that device's MSB or LSB.
// The LUT is the rank table RANK_ORDER of dirc_pkg plus a little arithmetic:
// INT8 data bit b < 4 of slot s is on the LSB at rank (3-b)*16 + s, so bit 3
// lives on the sixteen positions with the lowest LSB error rate and bit 0 on
// the sixteen worst; bit b >= 4 is on the MSB of the same device as bit b-4
// (MSBs read out without error).  INT4 (32 slots): bit 1 on ranks 0-31,
// bit 0 on ranks 32-63, bits 2-3 on the MSBs.  Purely combinational.
// The ranking rule follows the paper; the tie-break, the MSB pairing and the
// INT4 layout are this design's choices.
module remap_lut
  import dirc_pkg::*;
(
  input  prec_e      prec,
  input  logic [4:0] slot,
  input  logic [2:0] dbit,
  output mlc_addr_t  addr
);
  always_comb addr = remap_addr(prec, int'(slot), int'(dbit));
endmodule
