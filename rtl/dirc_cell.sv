// dirc_cell - behavioural model of one ReRAM-SRAM coupled DIRC cell.
//
// This is a cycle-level behavioural model of a mixed-signal cell, not logic
// meant for synthesis as is.  The real cell is an 8x8 subarray of four-level
// (two-bit) ReRAM devices, three reference ReRAMs (RL, RM, RH), a differential
// sense amplifier built into a 1-bit SRAM latch, and that SRAM bit, whose Q
// output feeds the NOR bit-multiplier of the column.
//
// Sensing (one clock each, sense_en high; wl and bl one-hot select a device):
//   * MSB sense (lsb_en low): the device is compared with RM; Q becomes 1 when
//     its level is in the upper half (level >= 2).
//   * LSB sense (lsb_en high): the reference is chosen by M = the Q left by the
//     previous cycle: RL when M = 0 (Q = level >= 1), RH when M = 1
//     (Q = level == 3).  The LSB is therefore only read correctly right after
//     an MSB sense of the same device; this model reproduces the wrong result
//     otherwise.
// Level coding {MSB,LSB}: 0 lowest resistance .. 3 highest (this design's
// choice; the paper gives the three-reference scheme, not the coding).
// 'flip' inverts the bit latched by a sense: it stands for the rare transient
// sensing error that the column's error detection must catch.
// prog_* writes one device per cycle (the ReRAM write circuitry is not part of
// the paper); sram_we writes the SRAM bit directly, which lets the column work
// as a plain SRAM compute-in-memory column.
module dirc_cell #(
  parameter int SUB = 8
) (
  input  logic                         clk,
  input  logic                         prog_en,
  input  logic [$clog2(SUB*SUB)-1:0]   prog_addr,   // {wl, bl}
  input  logic [1:0]                   prog_level,
  input  logic [SUB-1:0]               wl,          // one-hot
  input  logic [SUB-1:0]               bl,          // one-hot
  input  logic                         sense_en,
  input  logic                         lsb_en,
  input  logic                         flip,
  input  logic                         sram_we,
  input  logic                         sram_d,
  output logic                         q
);
  localparam int AW = $clog2(SUB*SUB);

  logic [1:0]    mlc [SUB*SUB];   // non-volatile device levels
  logic [AW-1:0] sel;
  logic [1:0]    level;
  logic          sensed;

  // One-hot word/bit lines to a device address.
  always_comb begin
    sel = '0;
    for (int i = 0; i < SUB; i++) begin
      if (wl[i]) sel[AW-1 -: AW/2] = (AW/2)'(i);
      if (bl[i]) sel[AW/2-1:0]     = (AW/2)'(i);
    end
    level = mlc[sel];
    if (!lsb_en) sensed = level[1];
    else if (q)  sensed = (level == 2'd3);
    else         sensed = (level != 2'd0);
  end

  always_ff @(posedge clk) begin
    if (prog_en) mlc[prog_addr] <= prog_level;
  end

  always_ff @(posedge clk) begin
    if (sram_we)       q <= sram_d;
    else if (sense_en) q <= sensed ^ flip;
  end

endmodule
