// dirc_accu - bit-serial shift-accumulator of a DIRC column.
//
// Each MAC cycle the column's adder gives the number of rows where data bit
// D_bit and query bit Q_bit are both one.  Its weight in the dot product is
// 2^(D_bit+Q_bit), negated when exactly one of the two bits is a sign bit
// (two's complement).  en adds (or, with neg, subtracts) din << shift; clr
// with en starts a new sum instead of adding to the old one.  One cycle
// latency; asynchronous active-low reset clears the sum.  The paper gives the
// cycle-by-cycle accumulation; the signed weighting is this design's.
module dirc_accu #(
  parameter int ACC_W = 26,
  parameter int IN_W  = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clr,
  input  logic                    neg,
  input  logic [3:0]              shift,
  input  logic [IN_W-1:0]         din,
  output logic signed [ACC_W-1:0] acc
);
  logic signed [ACC_W-1:0] term, base;

  always_comb begin
    term = signed'(ACC_W'(din) << shift);
    base = clr ? '0 : acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= neg ? base - term : base + term;
  end

endmodule
