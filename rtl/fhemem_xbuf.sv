// fhemem_xbuf: the per-bank transfer buffer of the inter-bank chain, two
// 256-bit entries used as a first-in first-out queue.
//
// A block enters from the bank's global path (a global read of a subarray row,
// fed over the MDLs) or from a transfer link, and leaves towards a link or the
// channel IO, or into the bank's global path (a global write). With two entries
// a block can be received while the previous one is sent, so a whole row
// streams at one block per cycle. push/pop are accepted when not full / not
// empty; a push and a pop in the same cycle are both accepted when the buffer
// holds one block. The two-entry size is the paper's; the queue discipline is
// this design's choice. Reset empties the buffer.
module fhemem_xbuf
  import fhemem_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push,
  input  block_t push_data,
  input  logic   pop,
  output block_t head,
  output logic   empty,
  output logic   full
);
  block_t     mem [2];
  logic       wp, rp;
  logic [1:0] cnt;

  assign empty = (cnt == 0);
  assign full  = (cnt == 2);
  assign head  = mem[rp];

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= 1'b0; rp <= 1'b0; cnt <= '0;
      mem[0] <= '0; mem[1] <= '0;
    end else begin
      if (do_push) begin mem[wp] <= push_data; wp <= ~wp; end
      if (do_pop) rp <= ~rp;
      cnt <= cnt + 2'(do_push) - 2'(do_pop);
    end
  end

  always_ff @(posedge clk) if (rst_n) a_no_overflow: assert (!(push && full && !pop));
  always_ff @(posedge clk) if (rst_n) a_no_underflow: assert (!(pop && empty));

endmodule
