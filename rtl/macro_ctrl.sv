// macro_ctrl - sequencer of the bit-level query-stationary dataflow.
//
// Runs, for one retrieval, the loop that every column of a DIRC macro
// executes in lockstep:
//   for slot in 0..NS-1            (NS = 16 INT8 / 32 INT4 embedding slices)
//     for D_bit in 0..NB-1         (NB = 8 INT8 / 4 INT4)
//       sense bit D_bit of the slot into the SRAM bits
//       error detection; on a mismatch re-sense the failing columns
//       for Q_bit in 0..NB-1: one MAC cycle
//     after the last slice of an embedding: write its dot product
// Sensing: the remap LUT gives the device and whether the bit is the device's
// MSB or LSB.  An MSB bit needs one sense cycle (state SMSB); an LSB bit needs
// the MSB sense followed by an LSB sense (SLSB), because the LSB reference is
// selected by the MSB just latched.  Error detection (ED, only with ed_on)
// drives all-ones inputs and compares every column's ones count with its LUT
// entry; if any column mismatches, the failing columns re-sense (resense high)
// and ED repeats, at most MAX_RESENSE times, after which the error is counted
// (uncorr_evt) and the dataflow goes on.
// Folding: with fold = log2(dim/128) an embedding occupies F = 2^fold
// consecutive slots; slot s multiplies with query chunk s mod F and the
// accumulator is cleared only at the first slice of an embedding.
// Signed weighting: term weight 2^(D_bit+Q_bit), negative when exactly one of
// the two bits is the sign bit.
// Cycle count per INT8 slot: 12 sense + 8 ED + 64 MAC (+1 result write per
// embedding), 1344..1360 cycles for a whole column without re-sensing.
// start is accepted in IDLE; busy stays high until the one-cycle done pulse.
// The loop order and the ED/re-sense scheme follow the paper; the retry limit,
// the result-write cycle and the state encoding are this design's.
module macro_ctrl
  import dirc_pkg::*;
#(
  parameter int MAXR = MAX_RESENSE
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  prec_e       prec,
  input  logic [1:0]  fold,
  input  logic        ed_on,
  input  logic        any_mismatch,
  output logic        busy,
  output logic        done,
  // sensing
  output logic [7:0]  wl,
  output logic [7:0]  bl,
  output logic        sense_en,
  output logic        lsb_en,
  output logic        resense,
  // error detection
  output logic        ed_en,
  output logic [6:0]  ed_idx,
  output logic        all_ones,
  // MAC
  output logic [2:0]  chunk,
  output logic [2:0]  qbit,
  output logic        mac_en,
  output logic        acc_clr,
  output logic        acc_neg,
  output logic [3:0]  acc_shift,
  output logic        res_wr,
  output logic [4:0]  res_grp,
  // statistics
  output logic        resense_evt,
  output logic        uncorr_evt
);
  typedef enum logic [2:0] {S_IDLE, S_SMSB, S_SLSB, S_ED, S_MAC, S_WRES} state_e;

  state_e     state;
  logic [4:0] slot;
  logic [2:0] dbit;
  logic [1:0] tries;
  logic       rs;            // current sensing is a re-sense
  mlc_addr_t  addr;
  logic [4:0] last_slot;
  logic [2:0] last_bit;
  logic [4:0] fmask;         // F-1
  logic       last_slice;    // slot is the last slice of an embedding

  remap_lut u_lut (.prec(prec), .slot(slot), .dbit(dbit), .addr(addr));

  always_comb begin
    last_slot  = (prec == PREC_INT8) ? 5'd15 : 5'd31;
    last_bit   = (prec == PREC_INT8) ? 3'd7  : 3'd3;
    fmask      = 5'((1 << fold) - 1);
    last_slice = ((slot & fmask) == fmask);
  end

  // Outputs decoded from the state.
  always_comb begin
    wl        = 8'(1) << addr.wl;
    bl        = 8'(1) << addr.bl;
    sense_en  = (state == S_SMSB) || (state == S_SLSB);
    lsb_en    = (state == S_SLSB);
    resense   = rs && sense_en;
    ed_en     = (state == S_ED);
    all_ones  = (state == S_ED);
    ed_idx    = (prec == PREC_INT8) ? 7'({slot[3:0], dbit}) : 7'({slot, dbit[1:0]});
    chunk     = 3'(slot & fmask);
    mac_en    = (state == S_MAC);
    acc_clr   = ((slot & fmask) == 5'd0) && (dbit == 3'd0) && (qbit == 3'd0);
    acc_neg   = (dbit == last_bit) ^ (qbit == last_bit);
    acc_shift = 4'(dbit) + 4'(qbit);
    res_wr    = (state == S_WRES);
    res_grp   = slot >> fold;
    busy      = (state != S_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      slot        <= '0;
      dbit        <= '0;
      qbit        <= '0;
      tries       <= '0;
      rs          <= 1'b0;
      done        <= 1'b0;
      resense_evt <= 1'b0;
      uncorr_evt  <= 1'b0;
    end else begin
      done        <= 1'b0;
      resense_evt <= 1'b0;
      uncorr_evt  <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          slot  <= '0;
          dbit  <= '0;
          qbit  <= '0;
          tries <= '0;
          rs    <= 1'b0;
          state <= S_SMSB;
        end
        S_SMSB: begin
          if (addr.lsb)   state <= S_SLSB;
          else if (ed_on) state <= S_ED;
          else            state <= S_MAC;
        end
        S_SLSB: state <= ed_on ? S_ED : S_MAC;
        S_ED: begin
          if (any_mismatch && (int'(tries) < MAXR)) begin
            tries       <= tries + 2'd1;
            rs          <= 1'b1;
            resense_evt <= 1'b1;
            state       <= S_SMSB;
          end else begin
            uncorr_evt  <= any_mismatch;
            tries       <= '0;
            rs          <= 1'b0;
            qbit        <= '0;
            state       <= S_MAC;
          end
        end
        S_MAC: begin
          if (qbit != last_bit) begin
            qbit <= qbit + 3'd1;
          end else begin
            qbit <= '0;
            rs   <= 1'b0;
            if (dbit != last_bit) begin
              dbit  <= dbit + 3'd1;
              state <= S_SMSB;
            end else if (last_slice) begin
              state <= S_WRES;
            end else begin
              dbit  <= '0;
              slot  <= slot + 5'd1;
              state <= S_SMSB;
            end
          end
        end
        S_WRES: begin
          dbit <= '0;
          if (slot == last_slot) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            slot  <= slot + 5'd1;
            state <= S_SMSB;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A new operation may only be started while idle.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);

endmodule
