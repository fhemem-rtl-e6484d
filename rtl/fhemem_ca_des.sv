// fhemem_ca_des: bank-side receiver of NMU commands on the 16-bit
// command/address bus.
//
// A command arrives most significant beat first, one 16-bit beat per cycle
// while ca_valid is high and ca_bank equals bank_id. The opcode in the top
// three bits of the first beat gives the length: 4 beats for the 64-bit permute
// store, 2 beats for every 32-bit command (the paper: 2 and 4 cycles). The
// assembled word, 32-bit commands left-aligned in 64 bits, is offered on
// cmd_valid/cmd_word until cmd_ready; meanwhile ca_ready is low and the sender
// must not start another command to this bank. Bank addressing on the bus and
// the ready signal are this design's choices.
module fhemem_ca_des
  import fhemem_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [2:0]  bank_id,   // this bank's number (strap)
  input  logic        ca_valid,
  input  logic [2:0]  ca_bank,
  input  logic [15:0] ca_data,
  output logic        ca_ready,
  output logic        cmd_valid,
  output logic [63:0] cmd_word,
  input  logic        cmd_ready
);
  logic [2:0]  got;     // beats received of the current command
  logic [2:0]  need;    // beats of the current command
  logic [63:0] sh;

  logic mine;
  assign mine     = ca_valid && (ca_bank == bank_id);
  assign ca_ready = !cmd_valid;
  assign cmd_word = sh;

  logic [2:0] n;   // beats of the command being received
  assign n = (got == 0) ? 3'(cmd_beats(nmu_op_e'(ca_data[15:13]))) : need;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got <= '0; need <= '0; sh <= '0; cmd_valid <= 1'b0;
    end else begin
      if (cmd_valid && cmd_ready) cmd_valid <= 1'b0;
      if (mine && !cmd_valid) begin
        if (got == 0) need <= n;
        sh[63 - 16*got -: 16] <= ca_data;
        if (got == 0) sh[47:0] <= '0;
        if (got + 1 == n) begin
          got       <= '0;
          cmd_valid <= 1'b1;
        end else got <= got + 1'b1;
      end
    end
  end

endmodule
