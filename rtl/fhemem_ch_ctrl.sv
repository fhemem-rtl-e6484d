// fhemem_ch_ctrl: decoder and controller of a channel, the last stage of the
// hierarchical control. It takes micro-operations in order from the queue and
// issues them to the banks:
//   NMU  the command word goes to the bank over the 16-bit C/A bus
//        (fhemem_ca_ser, 2 or 4 cycles)
//   ACT  activation of a row in one subarray, on the bank's row/column port
//   RD   route bank -> host for one block, then a 1-block global read
//   WR   route host -> bank for one block, then a 1-block global write
//   XFR  route bank -> bank for a 32-block row, a 32-block global read in the
//        source bank and a 32-block global write in the destination bank
//   BAR  wait until every bank, the C/A bus and the chain are idle
// A conventional command to a bank is held back while an NMU command to the
// same bank is still on the C/A bus or waiting in the bank, so every bank sees
// its commands in program order. All choices here follow the paper's division
// of work (micro-operations issued to the bank-level controllers); the
// micro-operation set and ordering rule are this design's.
module fhemem_ch_ctrl
  import fhemem_pkg::*;
#(
  parameter int unsigned BANKS = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  uop_t             head,
  input  logic             empty,
  output logic             pop,
  // C/A bus
  input  logic [BANKS-1:0] bank_ca_ready,
  output logic             ca_valid,
  output logic [2:0]       ca_bank,
  output logic [15:0]      ca_data,
  // conventional port
  output logic [BANKS-1:0] conv_valid,
  output bank_req_t        conv_req,
  input  logic [BANKS-1:0] conv_ready,
  // chain routes
  output logic             route_valid,
  output logic [3:0]       route_src,
  output logic [3:0]       route_dst,
  output logic [5:0]       route_n,
  input  logic             route_ready,
  input  logic [BANKS-1:0] bank_idle,
  input  logic             chain_idle,
  output logic             idle,
  output logic [31:0]      n_uops
);
  logic [1:0] step;
  logic       ser_valid, ser_ready;

  fhemem_ca_ser #(.BANKS(BANKS)) u_ser (
    .clk, .rst_n, .in_valid(ser_valid), .in_bank(head.bank), .in_word(head.payload),
    .in_ready(ser_ready), .bank_ready(bank_ca_ready), .ca_valid, .ca_bank, .ca_data
  );

  logic [2:0] b;
  logic [2:0] dbank;
  logic       ordered;   // no NMU command to bank b still in flight
  assign b       = head.bank;
  assign dbank   = head.payload[50:48];

  always_comb begin
    ser_valid   = 1'b0;
    conv_valid  = '0;
    conv_req    = '0;
    route_valid = 1'b0;
    route_src   = 4'(b);
    route_dst   = 4'(BANKS);
    route_n     = 6'd1;
    pop         = 1'b0;
    ordered     = bank_ca_ready[b] && !(ca_valid && ca_bank == b);
    conv_req.cmd.subarray = head.payload[60:51];
    if (!empty) begin
      unique case (head.kind)
        UOP_NMU: begin ser_valid = 1'b1; pop = ser_ready; end
        UOP_ACT: begin
          conv_req.kind = BR_ACT;
          conv_req.row  = head.payload[50:41];
          conv_valid[b] = ordered;
          pop           = ordered && conv_ready[b];
        end
        UOP_RD, UOP_WR: begin
          if (step == 0) begin
            route_valid = 1'b1;
            route_src   = (head.kind == UOP_RD) ? 4'(b) : 4'(BANKS);
            route_dst   = (head.kind == UOP_RD) ? 4'(BANKS) : 4'(b);
          end else begin
            conv_req.kind   = (head.kind == UOP_RD) ? BR_GRD : BR_GWR;
            conv_req.beat0  = head.payload[50:46];
            conv_req.nbeats = 6'd1;
            conv_valid[b]   = ordered;
            pop             = ordered && conv_ready[b];
          end
        end
        UOP_XFR: begin
          conv_req.nbeats = 6'd32;
          if (step == 0) begin
            route_valid = 1'b1;
            route_dst   = 4'(dbank);
            route_n     = 6'd32;
          end else if (step == 1) begin
            conv_req.kind = BR_GRD;
            conv_valid[b] = ordered;
          end else begin
            conv_req.kind         = BR_GWR;
            conv_req.cmd.subarray = head.payload[47:38];
            conv_valid[dbank]     = bank_ca_ready[dbank] && !(ca_valid && ca_bank == dbank);
            pop                   = conv_valid[dbank] && conv_ready[dbank];
          end
        end
        UOP_BAR: pop = (&bank_idle) && chain_idle && !ca_valid;
        default: pop = 1'b1;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step <= '0; n_uops <= '0;
    end else begin
      if (pop) begin step <= '0; n_uops <= n_uops + 1; end
      else if (route_valid && route_ready) step <= 2'd1;
      else if (head.kind == UOP_XFR && step == 1 && conv_valid[b] && conv_ready[b]) step <= 2'd2;
    end
  end

  assign idle = empty && !ca_valid;

endmodule
