// dirc_column - one DIRC column: 128 ReRAM-SRAM cells and their digital MAC.
//
// Cells: ROWS dirc_cell instances share the column's one-hot WL/BL selection,
// so one sense cycle loads the same device position of all ROWS subarrays
// into the ROWS SRAM bits (one bit-plane of one embedding slot).
// MAC: each SRAM bit Q and input bit IN meet in a NOR gate on QB and INB,
// i.e. Q AND IN; csa_tree counts the ones; dirc_accu weights the count by
// 2^(D_bit+Q_bit) and accumulates it.  After the last MAC cycle of an
// embedding the controller writes the sum into result register res_grp
// (NRES registers, read combinationally at res_rd).
// Error detection: with ed_en the inputs are all ones and the adder output is
// routed to ed_unit instead of the accumulator; mismatch goes to the
// controller at once and err selects this column for re-sensing: with
// resense high only columns with err set sense again.
// inj_en/inj_row arm a one-shot sensing error on one row, applied at that
// row's next sense (a test hook standing for transient interference).
// sram_we/sram_d write the SRAM bits directly (SRAM-CIM use).
// Everything updates on the rising clock edge; rst_n clears flags and the
// accumulator.  The structure follows Fig. 3(b) of the paper; result
// registers indexed by embedding number (instead of a shift chain) and the
// injection hook are this design's.
module dirc_column
  import dirc_pkg::*;
#(
  parameter int ROWS  = 128,
  parameter int NRES  = 32,
  parameter int ACC_W = 26
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // programming
  input  logic                     prog_en,
  input  logic [5:0]               prog_addr,
  input  logic [ROWS-1:0][1:0]     prog_data,
  input  logic                     dsum_we,
  input  logic [127:0][SUM_W-1:0]  dsum_data,
  input  logic                     sram_we,
  input  logic [ROWS-1:0]          sram_d,
  // sensing
  input  logic [7:0]               wl,
  input  logic [7:0]               bl,
  input  logic                     sense_en,
  input  logic                     lsb_en,
  input  logic                     resense,
  input  logic                     inj_en,
  input  logic [$clog2(ROWS)-1:0]  inj_row,
  // compute
  input  logic [ROWS-1:0]          in_bits,
  input  logic                     ed_en,
  input  logic [6:0]               ed_idx,
  input  logic                     mac_en,
  input  logic                     acc_clr,
  input  logic                     acc_neg,
  input  logic [3:0]               acc_shift,
  input  logic                     res_wr,
  input  logic [$clog2(NRES)-1:0]  res_grp,
  input  logic [$clog2(NRES)-1:0]  res_rd,
  output logic                     mismatch,
  output logic                     err,
  output logic signed [ACC_W-1:0]  res_data
);
  localparam int SW = $clog2(ROWS + 1);

  logic [ROWS-1:0]         q;
  logic [ROWS-1:0]         prod;
  logic [SW-1:0]           csum;
  logic                    col_sense;
  logic                    armed;
  logic [$clog2(ROWS)-1:0] armed_row;
  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] res [NRES];

  assign col_sense = sense_en && (!resense || err);

  for (genvar r = 0; r < ROWS; r++) begin : g_cell
    dirc_cell #(.SUB(8)) u_cell (
      .clk       (clk),
      .prog_en   (prog_en),
      .prog_addr (prog_addr),
      .prog_level(prog_data[r]),
      .wl        (wl),
      .bl        (bl),
      .sense_en  (col_sense),
      .lsb_en    (lsb_en),
      .flip      (armed && (armed_row == r)),
      .sram_we   (sram_we),
      .sram_d    (sram_d[r]),
      .q         (q[r])
    );
    // NOR bit-multiplier on the complementary nodes: ~(QB | INB) = Q & IN.
    assign prod[r] = ~((~q[r]) | (~in_bits[r]));
  end

  // One-shot sensing-error injection.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed     <= 1'b0;
      armed_row <= '0;
    end else if (inj_en) begin
      armed     <= 1'b1;
      armed_row <= inj_row;
    end else if (col_sense) begin
      armed     <= 1'b0;
    end
  end

  csa_tree #(.N(ROWS)) u_csa (.in_bits(prod), .sum(csum));

  ed_unit #(.NENT(128), .SUM_W(SUM_W)) u_ed (
    .clk      (clk),
    .rst_n    (rst_n),
    .lut_we   (dsum_we),
    .lut_wdata(dsum_data),
    .chk      (ed_en),
    .idx      (ed_idx),
    .real_sum (SUM_W'(csum)),
    .mismatch (mismatch),
    .err      (err)
  );

  dirc_accu #(.ACC_W(ACC_W), .IN_W(SW)) u_acc (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (mac_en && !ed_en),
    .clr  (acc_clr),
    .neg  (acc_neg),
    .shift(acc_shift),
    .din  (csum),
    .acc  (acc)
  );

  always_ff @(posedge clk) begin
    if (res_wr) res[res_grp] <= acc;
  end

  assign res_data = res[res_rd];

endmodule
