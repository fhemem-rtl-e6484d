// fhemem_mat: one DRAM mat with its local sense amplifiers, seen from the local
// data lines (LDLs).
//
// The mat is ROWS x COLS cells. An activation copies one row into the sense
// amplifiers (the row buffer) after T_ACT cycles. The open row is then read and
// written 16 bits (one beat) at a time over the LDLs: the read beat is
// combinational from the sense amplifiers, a write updates the sense amplifier
// and restores the open row in the array on the same clock edge, as a DRAM
// write to an open row does. There is no refresh and no precharge timing; a new
// activation simply replaces the open row. The cell array is written as a
// memory array; the analog sensing itself is not modelled.
//
// Geometry follows the ARx4 mat (128 rows of 512 bits) and the 16-bit LDL of
// the paper; the activation latency is this design's assumption.
//
// Interface: act/act_row start an activation; busy is high until the row is in
// the sense amplifiers. beat_addr selects the 16-bit column for rdata and for a
// write (we/wdata). Reset clears the sense amplifiers and the open-row pointer;
// the array contents are not reset.
module fhemem_mat
  import fhemem_pkg::*;
#(
  parameter int unsigned ROWS  = 128,
  parameter int unsigned COLS  = 512,
  parameter int unsigned T_ACT = 15
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        act,
  input  logic [$clog2(ROWS)-1:0]     act_row,
  output logic                        busy,
  input  logic [$clog2(COLS/BEAT_W)-1:0] beat_addr,
  output beat_t                       rdata,
  input  logic                        we,
  input  beat_t                       wdata
);
  localparam int unsigned NB = COLS / BEAT_W;

  beat_t                     cells [ROWS][NB];
  beat_t                     sa    [NB];
  logic [$clog2(ROWS)-1:0]   open_row;
  logic [$clog2(ROWS)-1:0]   pend_row;
  logic [$clog2(T_ACT+1)-1:0] act_cnt;

  assign busy  = (act_cnt != '0);
  assign rdata = sa[beat_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_cnt  <= '0;
      open_row <= '0;
      pend_row <= '0;
    end else if (act) begin
      act_cnt  <= ($clog2(T_ACT+1))'(T_ACT);
      pend_row <= act_row;
    end else if (act_cnt != '0) begin
      act_cnt <= act_cnt - 1'b1;
      if (act_cnt == 1) open_row <= pend_row;
    end
  end

  // Sense amplifiers: loaded when the activation completes, written over LDLs.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NB; b++) sa[b] <= '0;
    end else if (act_cnt == 1) begin
      for (int b = 0; b < NB; b++) sa[b] <= cells[pend_row][b];
    end else if (we && !busy) begin
      sa[beat_addr] <= wdata;
    end
  end

  // Cell array: restored from the sense amplifier on every write to the open row.
  always_ff @(posedge clk) begin
    if (we && !busy && act_cnt == 0) cells[open_row][beat_addr] <= wdata;
  end

endmodule
