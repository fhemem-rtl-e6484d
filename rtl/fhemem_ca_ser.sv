// fhemem_ca_ser: channel-side sender of NMU commands on the 16-bit
// command/address bus shared by the banks of a pseudo-channel.
//
// A 64-bit command word (32-bit commands left-aligned) with its bank number is
// accepted on in_valid/in_ready and sent most significant beat first, one
// 16-bit beat per cycle: 2 cycles for a 32-bit command, 4 for the 64-bit
// permute store, as in the paper. A command is started only when the target
// bank's receiver is free (bank_ready). The bus carries the bank number beside
// the data (this design's choice).
module fhemem_ca_ser
  import fhemem_pkg::*;
#(
  parameter int unsigned BANKS = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [2:0]       in_bank,
  input  logic [63:0]      in_word,
  output logic             in_ready,
  input  logic [BANKS-1:0] bank_ready,
  output logic             ca_valid,
  output logic [2:0]       ca_bank,
  output logic [15:0]      ca_data
);
  logic [63:0] sh;
  logic [2:0]  left;   // beats still to send

  assign in_ready = (left == 0) && bank_ready[in_bank];
  assign ca_valid = (left != 0);
  assign ca_data  = sh[63:48];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh <= '0; left <= '0; ca_bank <= '0;
    end else if (left != 0) begin
      sh   <= {sh[47:0], 16'd0};
      left <= left - 1'b1;
    end else if (in_valid && in_ready) begin
      sh      <= in_word;
      ca_bank <= in_bank;
      left    <= 3'(cmd_beats(nmu_op_e'(in_word[63:61])));
    end
  end

endmodule
