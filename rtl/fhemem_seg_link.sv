// fhemem_seg_link: a data line split by isolation switches, as used for the
// horizontal data lines (HDLs, one per subarray, joining its 16 NMUs) and the
// master data lines (MDLs, one per mat column, joining the NMUs of that column
// in every subarray).
//
// NODES taps sit on one line. Switch sw[i] joins tap i and tap i+1 when set;
// open switches cut the line into segments that carry data independently. Each
// tap may drive a beat (drv_en/drv_data); every tap receives the beat driven in
// its own segment (rx_data), or zero when nobody drives it. Electrically the line
// is a wire with pass transistors; here it is a forward and a backward scan over
// the taps, linear in NODES. At most one tap may drive a segment: the conflict
// output flags a second driver, and the enclosing blocks assert that it stays
// low (their controllers schedule transfers so that it never happens).
//
// From the paper: the switched line and its 16-bit width. The wired-OR view of
// an undriven or idle segment as zero is this design's choice. Purely
// combinational, no clock.
module fhemem_seg_link #(
  parameter int unsigned NODES = 16,
  parameter int unsigned W     = 16
) (
  input  logic [NODES-1:0]   drv_en,
  input  logic [W-1:0]       drv_data [NODES],
  input  logic [NODES-2:0]   sw,
  output logic [W-1:0]       rx_data  [NODES],
  output logic               conflict
);
  logic [W-1:0] fwd [NODES];
  logic [W-1:0] bwd [NODES];
  logic [NODES-1:0] fwd_en, bwd_en;
  logic [NODES-1:0] clash;

  always_comb begin
    for (int i = 0; i < NODES; i++) begin
      fwd[i]    = drv_en[i] ? drv_data[i] : '0;
      fwd_en[i] = drv_en[i];
      clash[i]  = 1'b0;
      if (i > 0 && sw[i-1]) begin
        fwd[i]    = fwd[i] | fwd[i-1];
        fwd_en[i] = fwd_en[i] | fwd_en[i-1];
        clash[i]  = drv_en[i] & fwd_en[i-1];
      end
    end
    for (int i = NODES - 1; i >= 0; i--) begin
      bwd[i]    = drv_en[i] ? drv_data[i] : '0;
      bwd_en[i] = drv_en[i];
      if (i < NODES - 1 && sw[i]) begin
        bwd[i]    = bwd[i] | bwd[i+1];
        bwd_en[i] = bwd_en[i] | bwd_en[i+1];
      end
    end
    for (int i = 0; i < NODES; i++) rx_data[i] = fwd[i] | bwd[i];
  end

  assign conflict = |clash;

endmodule
