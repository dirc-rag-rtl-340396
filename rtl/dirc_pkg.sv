// dirc_pkg - sizes, types and the error-aware bit-remapping table of the
// DIRC-RAG retrieval accelerator.
//
// The accelerator keeps every document embedding inside sixteen DIRC macros.
// Each macro has 128 columns of 128 ReRAM-SRAM cells; each cell holds an 8x8
// subarray of two-bit (four-level) ReRAM devices, i.e. 128 bits, enough for
// one 128-element slice of sixteen INT8 (or thirty-two INT4) embeddings.
//
// Error-aware mapping: the most significant data bits are stored on the
// device MSBs, which read out without error; the low bits go to the device
// LSBs, ordered by the LSB read-out error map measured per position.  The map
// below is the 8x8 table of LSB error rates (tenths of a percent), indexed
// [wl*8 + bl].  RANK_ORDER ranks the 64 positions by error rate (ties by
// position) so that data bit 3 lands on the sixteen best positions and data
// bit 0 on the sixteen worst.  Bit b+4 is kept on the MSB of the same device
// as bit b.  The sizes (16 cores, 128x128 cells, 8x8 subarray, INT8/INT4,
// 128..1024 dimensions) and the map values follow the paper; the pairing of
// MSB and LSB bits, the INT4 layout, the fixed-point formats and k = 5 are
// choices of this design.
package dirc_pkg;

  localparam int N_CORES   = 16;     // DIRC-RAG cores
  localparam int COLS      = 128;    // DIRC columns per macro
  localparam int ROWS      = 128;    // DIRC cells per column
  localparam int SUB       = 8;      // subarray is SUB x SUB MLC devices
  localparam int NMLC      = SUB * SUB;
  localparam int MAX_DIM   = 1024;   // longest embedding
  localparam int CHUNKS    = MAX_DIM / 128;
  localparam int NSLOT     = 32;     // slots per column (INT4); INT8 uses 16
  localparam int SUM_W     = 8;      // $clog2(ROWS+1)
  localparam int ACC_W     = 26;     // signed dot-product width
  localparam int NORM_FRAC = 4;      // fraction bits of a norm
  localparam int NORM_W    = 18;     // unsigned norm width
  localparam int COS_FRAC  = 14;     // fraction bits of a cosine score
  localparam int SCORE_W   = ACC_W;  // signed score width
  localparam int IDX_W     = 16;     // global document index
  localparam int TOPK      = 5;      // k of the top-k selection
  localparam int MAX_RESENSE = 3;    // re-sense attempts per bit-plane
  localparam int NB_DEPTH  = 4096;   // norm/index buffer entries per core

  typedef enum logic {PREC_INT8 = 1'b0, PREC_INT4 = 1'b1} prec_e;

  // Address of one bit inside a DIRC cell's subarray.
  typedef struct packed {
    logic [2:0] wl;
    logic [2:0] bl;
    logic       lsb;   // 1: device LSB, 0: device MSB
  } mlc_addr_t;

  // Candidate of a top-k list.
  typedef struct packed {
    logic                      valid;
    logic signed [SCORE_W-1:0] score;
    logic [IDX_W-1:0]          idx;
  } cand_t;

  // LSB read-out error rate per position, tenths of a percent, [wl*8+bl].
  localparam logic [3:0] ERR_MAP [NMLC] = '{
    4'd5, 4'd6, 4'd6, 4'd7, 4'd6, 4'd6, 4'd3, 4'd2,
    4'd5, 4'd6, 4'd6, 4'd7, 4'd6, 4'd5, 4'd3, 4'd2,
    4'd4, 4'd5, 4'd6, 4'd7, 4'd6, 4'd5, 4'd2, 4'd2,
    4'd4, 4'd5, 4'd6, 4'd6, 4'd6, 4'd5, 4'd2, 4'd2,
    4'd4, 4'd5, 4'd6, 4'd6, 4'd6, 4'd6, 4'd2, 4'd2,
    4'd4, 4'd5, 4'd6, 4'd7, 4'd6, 4'd6, 4'd4, 4'd2,
    4'd4, 4'd6, 4'd6, 4'd6, 4'd6, 4'd6, 4'd2, 4'd2,
    4'd5, 4'd6, 4'd6, 4'd7, 4'd6, 4'd6, 4'd4, 4'd1
  };

  // Positions (wl*8+bl) sorted by rising LSB error rate, ties broken by the
  // lower position: RANK_ORDER[r] is the position p whose rank
  //   r(p) = #{o : ERR_MAP[o] < ERR_MAP[p] or (ERR_MAP[o] == ERR_MAP[p] and o < p)}
  // equals r (the testbench recomputes it from ERR_MAP).
  localparam logic [5:0] RANK_ORDER [NMLC] = '{
    6'd63, 6'd7, 6'd15, 6'd22, 6'd23, 6'd30, 6'd31, 6'd38,
    6'd39, 6'd47, 6'd54, 6'd55, 6'd6, 6'd14, 6'd16, 6'd24,
    6'd32, 6'd40, 6'd46, 6'd48, 6'd62, 6'd0, 6'd8, 6'd13,
    6'd17, 6'd21, 6'd25, 6'd29, 6'd33, 6'd41, 6'd56, 6'd1,
    6'd2, 6'd4, 6'd5, 6'd9, 6'd10, 6'd12, 6'd18, 6'd20,
    6'd26, 6'd27, 6'd28, 6'd34, 6'd35, 6'd36, 6'd37, 6'd42,
    6'd44, 6'd45, 6'd49, 6'd50, 6'd51, 6'd52, 6'd53, 6'd57,
    6'd58, 6'd60, 6'd61, 6'd3, 6'd11, 6'd19, 6'd43, 6'd59
  };

  // Where bit dbit of the embedding element in slot 'slot' is stored.
  function automatic mlc_addr_t remap_addr(input prec_e prec, input int slot, input int dbit);
    mlc_addr_t  a;
    logic [5:0] pos;
    int         lbit;   // LSB-plane bit this bit is paired with
    int         rank;
    if (prec == PREC_INT8) begin
      lbit = dbit % 4;
      rank = (3 - lbit) * 16 + (slot % 16);
      a.lsb = (dbit < 4);
    end else begin
      lbit = dbit % 2;
      rank = (1 - lbit) * 32 + (slot % 32);
      a.lsb = (dbit < 2);
    end
    pos  = RANK_ORDER[rank];
    a.wl = pos[5:3];
    a.bl = pos[2:0];
    return a;
  endfunction

endpackage
