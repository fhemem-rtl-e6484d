// fhemem_nmu: near-mat unit, the compute logic placed beside each mat.
//
// The NMU holds eight 64-bit operand latches (one 512-bit mat row), and
// NUM_ADDERS adders. Adder k has an operand register B[k] loaded from the data
// lines and an accumulator ACC[k]. One add step (one cycle) computes
//     ACC[k] <= (clr ? 0 : ACC[k]) +/- ((B[k] << bit) masked by A[k][bit])
// where A[k] is operand latch (add_lat + k) mod 8 and the mask is applied only
// when add_and is set. Stepping bit from 0 to 63 with the mask multiplies A by
// B (n cycles for an n-bit product); stepping only over the set bits of a
// low-Hamming-weight constant, without the mask, multiplies B by that constant
// in h steps, which is how Montgomery reduction with special moduli is done.
//
// All data enters and leaves 16 bits (one beat) per cycle: the input mux picks
// the mat's LDL, the horizontal data lines (HDL) or the master data lines (MDL);
// the output mux drives either a latch beat or the LDL beat passed straight
// through (used by inter-mat moves), and the mat write mux writes the mat from
// a latch, the HDL or the MDL.
//
// From the paper: operand latches, shift&AND, n-bit adders with feedback, the
// two multiplexers and their sources and destinations. This design's choices:
// the accumulator is 2n bits wide so that the full 128-bit product is kept (the
// Montgomery step needs both halves), and an adder can subtract (needed by the
// +/- terms of the special moduli; a full adder with an inverted operand and a
// carry-in). Control is a per-cycle nmu_ctl_t from the subarray controller; the
// NMU itself has no sequencing state.
module fhemem_nmu
  import fhemem_pkg::*;
#(
  parameter int unsigned NUM_ADDERS = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  nmu_ctl_t ctl,
  input  beat_t    ldl_rd,    // beat read from the mat's open row
  input  beat_t    hdl_rx,    // beat seen on this NMU's HDL segment
  input  beat_t    mdl_rx,    // beat seen on this NMU's MDL segment
  output beat_t    tx,        // beat this NMU offers to HDL / MDL
  output logic     mat_we,
  output beat_t    mat_wd
);
  localparam int unsigned AW = 2 * WORD_W;

  word_t             opl [ROW_WORDS];
  word_t             b   [NUM_ADDERS];
  logic [AW-1:0]     acc [NUM_ADDERS];

  // ---- latch read -----------------------------------------------------------
  word_t rd_word;
  always_comb begin
    rd_word = '0;
    unique case (ctl.space)
      SP_OPL:    rd_word = opl[ctl.word];
      SP_ADB:    if (ctl.word < NUM_ADDERS) rd_word = b[ctl.word];
      SP_ACC_LO: if (ctl.word < NUM_ADDERS) rd_word = acc[ctl.word][WORD_W-1:0];
      SP_ACC_HI: if (ctl.word < NUM_ADDERS) rd_word = acc[ctl.word][AW-1:WORD_W];
      default: ;
    endcase
  end
  beat_t rd_beat;
  assign rd_beat = rd_word[ctl.beat*BEAT_W +: BEAT_W];

  // ---- input mux --------------------------------------------------------------
  beat_t in_beat;
  always_comb begin
    unique case (ctl.lat_src)
      SRC_HDL: in_beat = hdl_rx;
      SRC_MDL: in_beat = mdl_rx;
      default: in_beat = ldl_rd;
    endcase
  end

  // ---- output muxes -----------------------------------------------------------
  assign tx = (ctl.tx_src == TX_LDL) ? ldl_rd : rd_beat;
  assign mat_we = ctl.mat_we;
  always_comb begin
    unique case (ctl.mat_src)
      WR_HDL:  mat_wd = hdl_rx;
      WR_MDL:  mat_wd = mdl_rx;
      default: mat_wd = rd_beat;
    endcase
  end

  // ---- operand latches and adder operand registers ---------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROW_WORDS; i++) opl[i] <= '0;
      for (int k = 0; k < NUM_ADDERS; k++) b[k] <= '0;
    end else if (ctl.lat_we) begin
      if (ctl.space == SP_OPL) opl[ctl.word][ctl.beat*BEAT_W +: BEAT_W] <= in_beat;
      else if (ctl.space == SP_ADB && ctl.word < NUM_ADDERS)
        b[ctl.word][ctl.beat*BEAT_W +: BEAT_W] <= in_beat;
    end
  end

  // ---- shift & AND and the adders -----------------------------------------------
  logic [AW-1:0] term [NUM_ADDERS];
  always_comb begin
    for (int k = 0; k < NUM_ADDERS; k++) begin
      logic [2:0] li;
      logic       mbit;
      li      = 3'(ctl.add_lat + 3'(k));
      mbit    = opl[li][ctl.add_bit];
      term[k] = AW'(b[k]) << ctl.add_bit;
      if (ctl.add_and && !mbit) term[k] = '0;
    end
  end

  logic [AW-1:0] acc_nx [NUM_ADDERS];
  always_comb begin
    for (int k = 0; k < NUM_ADDERS; k++) begin
      logic [AW-1:0] base;
      base = ctl.add_clr ? '0 : acc[k];
      // a - t is computed as a + ~t + 1 on the same adder
      acc_nx[k] = ctl.add_sub ? base + ~term[k] + AW'(1) : base + term[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NUM_ADDERS; k++) acc[k] <= '0;
    end else if (ctl.add_en) begin
      for (int k = 0; k < NUM_ADDERS; k++) acc[k] <= acc_nx[k];
    end
  end

endmodule
