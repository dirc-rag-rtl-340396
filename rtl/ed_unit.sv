// ed_unit - error detection of a DIRC column: D Sum LUT and comparator.
//
// After a bit-plane of the column has been sensed into the SRAM bits, the
// input registers drive all ones for one cycle, so the column adder outputs
// the number of ones in the plane.  chk marks that cycle: the comparator
// checks real_sum against the entry idx of the D Sum LUT, which holds the same
// count computed offline from the data written into the ReRAM.  mismatch is
// the combinational result (the controller uses it in the same cycle); err
// registers it and tells the column which cells must be re-sensed.
// The LUT is written whole (lut_we) when the column is programmed.
// The comparison scheme follows the paper; LUT storage as registers and the
// write port are this design's.
module ed_unit #(
  parameter int NENT  = 128,
  parameter int SUM_W = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     lut_we,
  input  logic [NENT-1:0][SUM_W-1:0] lut_wdata,
  input  logic                     chk,
  input  logic [$clog2(NENT)-1:0]  idx,
  input  logic [SUM_W-1:0]         real_sum,
  output logic                     mismatch,
  output logic                     err
);
  logic [NENT-1:0][SUM_W-1:0] lut;

  always_ff @(posedge clk) begin
    if (lut_we) lut <= lut_wdata;
  end

  assign mismatch = chk && (real_sum != lut[idx]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   err <= 1'b0;
    else if (chk) err <= mismatch;
  end

endmodule
