// input_regs - query-stationary input (wordline) registers of a DIRC macro.
//
// Hold the whole query embedding, up to CHUNKS slices of ROWS elements, for
// the duration of a retrieval, so the query is read from outside only once.
// q_wr stores one slice of ROWS 8-bit elements per cycle into slice q_chunk.
// in_bits drives, to the ROWS bit-multipliers, bit qbit of every element of
// slice 'chunk', or all ones during an error detection cycle (all_ones).
// Combinational read; writes take effect at the clock edge.  The 128-element
// write width is this design's choice.
module input_regs #(
  parameter int ROWS   = 128,
  parameter int CHUNKS = 8
) (
  input  logic                          clk,
  input  logic                          q_wr,
  input  logic [$clog2(CHUNKS)-1:0]     q_chunk,
  input  logic [ROWS-1:0][7:0]          q_data,
  input  logic [$clog2(CHUNKS)-1:0]     chunk,
  input  logic [2:0]                    qbit,
  input  logic                          all_ones,
  output logic [ROWS-1:0]               in_bits
);
  logic [ROWS-1:0][7:0] q [CHUNKS];

  always_ff @(posedge clk) begin
    if (q_wr) q[q_chunk] <= q_data;
  end

  always_comb begin
    for (int i = 0; i < ROWS; i++) in_bits[i] = all_ones | q[chunk][i][qbit];
  end

endmodule
