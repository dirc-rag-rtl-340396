// dirc_macro - DIRC macro: COLS DIRC columns, input registers and sequencer.
//
// Stores COLS x ROWS DIRC cells (2 Mb of ReRAM at 128 x 128) and computes,
// for a query held in the input registers, the dot product of the query with
// every embedding stored in every column.  All columns run the same
// macro_ctrl schedule in lockstep; the controller sees the OR of the column
// error-detection results and re-senses only the columns that failed.
// Each finished dot product stays in its column's result register; a read-out
// port then streams them out, one per cycle, embedding number (grp) major and
// column minor, as soon as each embedding number has been written in all
// columns.  done pulses once the last result has left; busy covers the whole
// operation.
// Programming: prog_* writes one device address of all ROWS cells of column
// prog_col; dsum_* writes a column's D Sum LUT; sram_* writes a column's SRAM
// bits directly.  inj_* arms a one-shot sensing error (test hook).
// Query: q_wr loads one 128-element chunk per cycle (all chunks before start).
// The organisation follows Fig. 3(b) of the paper; the read-out order and the
// programming ports are this design's.
module dirc_macro
  import dirc_pkg::*;
#(
  parameter int COLS = 128,
  parameter int ROWS = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // query
  input  logic                          q_wr,
  input  logic [2:0]                    q_chunk,
  input  logic [ROWS-1:0][7:0]          q_data,
  // operation
  input  prec_e                         prec,
  input  logic [1:0]                    fold,
  input  logic                          ed_on,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  // programming
  input  logic                          prog_en,
  input  logic [$clog2(COLS)-1:0]       prog_col,
  input  logic [5:0]                    prog_addr,
  input  logic [ROWS-1:0][1:0]          prog_data,
  input  logic                          dsum_we,
  input  logic [$clog2(COLS)-1:0]       dsum_col,
  input  logic [127:0][SUM_W-1:0]       dsum_data,
  input  logic                          sram_we,
  input  logic [$clog2(COLS)-1:0]       sram_col,
  input  logic [ROWS-1:0]               sram_d,
  input  logic                          inj_en,
  input  logic [$clog2(COLS)-1:0]       inj_col,
  input  logic [$clog2(ROWS)-1:0]       inj_row,
  // result stream
  output logic                          rd_valid,
  output logic [$clog2(COLS)-1:0]       rd_col,
  output logic [4:0]                    rd_grp,
  output logic signed [ACC_W-1:0]       rd_data,
  // statistics
  output logic                          resense_evt,
  output logic                          uncorr_evt
);
  localparam int CW = $clog2(COLS);

  logic [7:0]       wl, bl;
  logic             sense_en, lsb_en, resense, ed_en, all_ones;
  logic [6:0]       ed_idx;
  logic [2:0]       chunk, qbit;
  logic             mac_en, acc_clr, acc_neg;
  logic [3:0]       acc_shift;
  logic             res_wr;
  logic [4:0]       res_grp;
  logic             ctl_busy, ctl_done;
  logic [ROWS-1:0]  in_bits;
  logic [COLS-1:0]  mism;
  logic             any_mismatch;
  logic signed [ACC_W-1:0] col_res [COLS];

  // read-out state
  logic [5:0]       grp_written;   // embedding numbers written so far
  logic [5:0]       ngrp;          // embeddings per column
  logic [5:0]       rd_cnt;        // embedding numbers fully streamed
  logic [4:0]       rgrp;
  logic [CW-1:0]    rcol;
  logic             ctl_fin;       // controller finished this operation
  logic             done_q;        // read-out of this operation finished

  input_regs #(.ROWS(ROWS), .CHUNKS(8)) u_in (
    .clk(clk), .q_wr(q_wr), .q_chunk(q_chunk), .q_data(q_data),
    .chunk(chunk), .qbit(qbit), .all_ones(all_ones), .in_bits(in_bits)
  );

  macro_ctrl u_ctl (
    .clk(clk), .rst_n(rst_n), .start(start), .prec(prec), .fold(fold), .ed_on(ed_on),
    .any_mismatch(any_mismatch), .busy(ctl_busy), .done(ctl_done),
    .wl(wl), .bl(bl), .sense_en(sense_en), .lsb_en(lsb_en), .resense(resense),
    .ed_en(ed_en), .ed_idx(ed_idx), .all_ones(all_ones),
    .chunk(chunk), .qbit(qbit), .mac_en(mac_en), .acc_clr(acc_clr), .acc_neg(acc_neg),
    .acc_shift(acc_shift), .res_wr(res_wr), .res_grp(res_grp),
    .resense_evt(resense_evt), .uncorr_evt(uncorr_evt)
  );

  for (genvar c = 0; c < COLS; c++) begin : g_col
    dirc_column #(.ROWS(ROWS), .NRES(32), .ACC_W(ACC_W)) u_col (
      .clk(clk), .rst_n(rst_n),
      .prog_en  (prog_en && (prog_col == CW'(c))),
      .prog_addr(prog_addr),
      .prog_data(prog_data),
      .dsum_we  (dsum_we && (dsum_col == CW'(c))),
      .dsum_data(dsum_data),
      .sram_we  (sram_we && (sram_col == CW'(c))),
      .sram_d   (sram_d),
      .wl(wl), .bl(bl), .sense_en(sense_en), .lsb_en(lsb_en), .resense(resense),
      .inj_en   (inj_en && (inj_col == CW'(c))),
      .inj_row  (inj_row),
      .in_bits(in_bits), .ed_en(ed_en), .ed_idx(ed_idx), .mac_en(mac_en),
      .acc_clr(acc_clr), .acc_neg(acc_neg), .acc_shift(acc_shift),
      .res_wr(res_wr), .res_grp(res_grp), .res_rd(rgrp),
      .mismatch(mism[c]), .err(), .res_data(col_res[c])
    );
  end

  assign any_mismatch = |mism;
  assign ngrp   = ((prec == PREC_INT8) ? 6'd16 : 6'd32) >> fold;
  assign rgrp   = rd_cnt[4:0];
  assign busy   = ctl_busy || !done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp_written <= '0;
      rd_cnt      <= '0;
      rcol        <= '0;
      ctl_fin     <= 1'b0;
      done_q      <= 1'b1;
      done        <= 1'b0;
      rd_valid    <= 1'b0;
      rd_col      <= '0;
      rd_grp      <= '0;
      rd_data     <= '0;
    end else begin
      done     <= 1'b0;
      rd_valid <= 1'b0;
      if (start && !ctl_busy) begin
        grp_written <= '0;
        rd_cnt      <= '0;
        rcol        <= '0;
        ctl_fin     <= 1'b0;
        done_q      <= 1'b0;
      end else begin
        if (res_wr)   grp_written <= grp_written + 6'd1;
        if (ctl_done) ctl_fin <= 1'b1;
        if (!done_q && (rd_cnt < grp_written)) begin
          rd_valid <= 1'b1;
          rd_col   <= rcol;
          rd_grp   <= rgrp;
          rd_data  <= col_res[rcol];
          rcol     <= rcol + CW'(1);
          if (rcol == CW'(COLS - 1)) rd_cnt <= rd_cnt + 6'd1;
        end
        if (!done_q && ctl_fin && rd_cnt == ngrp) begin
          done   <= 1'b1;
          done_q <= 1'b1;
        end
      end
    end
  end

endmodule
