// fhemem_uprog: micro-program logic and its scratchpad (SPAD) in the channel
// controller.
//
// The host first loads micro-programs into the SPAD (spad_we/addr/wdata, one
// 72-bit micro-operation per entry). A PIM operation from the host (bbop_valid
// with the SPAD start address and a subarray base) is accepted when the unit is
// idle; the unit then reads the SPAD from that address, one entry per cycle,
// adds the base to every subarray field (payload[60:51], and the destination
// subarray payload[47:38] of a row transfer) and pushes the result into the
// micro-operation queue, until it reaches an END entry, which is not pushed.
// busy stays high from acceptance until the END entry has been read.
//
// From the paper: the host sends PIM operations to each channel, whose
// micro-program logic expands them, from a scratchpad loaded by the host, into
// micro-operations for a queue. The SPAD depth, the entry format and the base
// address relocation (the paper's "set address register file") are this
// design's choices.
module fhemem_uprog
  import fhemem_pkg::*;
#(
  parameter int unsigned SPAD_DEPTH = 256
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          spad_we,
  input  logic [$clog2(SPAD_DEPTH)-1:0] spad_addr,
  input  uop_t                          spad_wdata,
  input  logic                          bbop_valid,
  input  logic [$clog2(SPAD_DEPTH)-1:0] bbop_start,
  input  logic [9:0]                    bbop_base,
  output logic                          bbop_ready,
  output logic                          busy,
  output logic                          q_push,
  output uop_t                          q_uop,
  input  logic                          q_full
);
  localparam int unsigned AW = $clog2(SPAD_DEPTH);

  uop_t          spad [SPAD_DEPTH];
  logic [AW-1:0] pc;
  logic [9:0]    base;
  logic          run;

  always_ff @(posedge clk) if (spad_we) spad[spad_addr] <= spad_wdata;

  uop_t cur;
  always_comb begin
    cur = spad[pc];
    q_uop = cur;
    q_uop.payload[60:51] = cur.payload[60:51] + base;
    if (cur.kind == UOP_XFR) q_uop.payload[47:38] = cur.payload[47:38] + base;
  end

  assign busy       = run;
  assign bbop_ready = !run;
  assign q_push     = run && !q_full && (cur.kind != UOP_END);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; pc <= '0; base <= '0;
    end else if (!run) begin
      if (bbop_valid) begin run <= 1'b1; pc <= bbop_start; base <= bbop_base; end
    end else if (cur.kind == UOP_END) begin
      run <= 1'b0;
    end else if (!q_full) begin
      pc <= pc + 1'b1;
    end
  end

endmodule
