// fhemem_uop_queue: the micro-operation queue of a channel controller, a
// first-in first-out queue of DEPTH micro-operations (uop_t, 72 bits).
//
// The micro-program logic pushes decoded micro-operations, the channel's
// decoder and controller pops them in order. push is taken when not full, pop
// when not empty; both in one cycle are allowed. DEPTH is this design's choice,
// the paper names the queue without a size.
module fhemem_uop_queue
  import fhemem_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  uop_t push_uop,
  output logic full,
  input  logic pop,
  output uop_t head,
  output logic empty
);
  localparam int unsigned AW = $clog2(DEPTH);
  uop_t          mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;

  assign full  = (cnt == (AW+1)'(DEPTH));
  assign empty = (cnt == 0);
  assign head  = mem[rp];

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp] <= push_uop;

  always_ff @(posedge clk) if (rst_n) a_no_overflow: assert (!(push && full));

endmodule
