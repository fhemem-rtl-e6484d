// fhemem_channel: one pseudo-channel of the processing-in-memory HBM stack,
// the top of this design.
//
// It holds the channel-level controller (micro-program logic with its
// scratchpad, the micro-operation queue, and the decoder/controller that drives
// the 16-bit command/address bus and the banks' row/column ports), BANKS banks
// with near-mat processing, and the inter-bank chain with the channel IO.
//
// Host interface: spad_* loads micro-operations into the scratchpad; bbop_*
// starts a PIM operation (scratchpad start address and subarray base); busy is
// high until the operation's last micro-operation has been issued and every
// bank is idle again. host_w* and host_r* are the channel IO's data ports for
// 256-bit blocks written to or read from the banks. Status: err (a bank
// dropped an invalid command) and event counters used by the testbench.
//
// A stack is 32 such pseudo-channels joined by a crossbar in the base die; the
// crossbar, the PHY, the TSVs and the stack-to-stack links are outside this
// design.
module fhemem_channel
  import fhemem_pkg::*;
#(
  parameter int unsigned BANKS       = 8,
  parameter int unsigned SUBARRAYS   = 64,
  parameter int unsigned ROWS        = 128,
  parameter int unsigned NUM_ADDERS  = 4,
  parameter int unsigned T_ACT       = 15,
  parameter int unsigned GROUP       = 4,
  parameter int unsigned CHIO_CYCLES = 2,
  parameter int unsigned SPAD_DEPTH  = 256,
  parameter int unsigned QDEPTH      = 8
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
  input  logic                          host_wvalid,
  input  block_t                        host_wdata,
  output logic                          host_wready,
  output logic                          host_rvalid,
  output block_t                        host_rdata,
  output logic                          err,
  output logic [31:0]                   n_uops,
  output logic [31:0]                   n_link_blocks,
  output logic [31:0]                   n_io_blocks,
  output logic [31:0]                   n_reconf,
  output logic [31:0]                   par_peak
);
  // ---- micro-program logic and queue ----------------------------------------------
  logic q_push, q_full, q_pop, q_empty, up_busy;
  uop_t q_in, q_head;

  fhemem_uprog #(.SPAD_DEPTH(SPAD_DEPTH)) u_uprog (
    .clk, .rst_n, .spad_we, .spad_addr, .spad_wdata, .bbop_valid, .bbop_start, .bbop_base,
    .bbop_ready, .busy(up_busy), .q_push, .q_uop(q_in), .q_full
  );
  fhemem_uop_queue #(.DEPTH(QDEPTH)) u_queue (
    .clk, .rst_n, .push(q_push), .push_uop(q_in), .full(q_full),
    .pop(q_pop), .head(q_head), .empty(q_empty)
  );

  // ---- decoder and controller -------------------------------------------------------
  logic [BANKS-1:0] bank_ca_ready, conv_valid, conv_ready, bank_idle, bank_err;
  logic             ca_valid;
  logic [2:0]       ca_bank;
  logic [15:0]      ca_data;
  bank_req_t        conv_req;
  logic             route_valid, route_ready, chain_idle, cc_idle;
  logic [3:0]       route_src, route_dst;
  logic [5:0]       route_n;

  fhemem_ch_ctrl #(.BANKS(BANKS)) u_cc (
    .clk, .rst_n, .head(q_head), .empty(q_empty), .pop(q_pop),
    .bank_ca_ready, .ca_valid, .ca_bank, .ca_data, .conv_valid, .conv_req, .conv_ready,
    .route_valid, .route_src, .route_dst, .route_n, .route_ready,
    .bank_idle, .chain_idle, .idle(cc_idle), .n_uops
  );

  // ---- banks ----------------------------------------------------------------------
  logic [BANKS-1:0] out_valid, out_ready, in_valid, in_ready;
  block_t           out_data [BANKS];
  block_t           in_data  [BANKS];
  logic [31:0]      b_reconf [BANKS];
  logic [31:0]      b_peak   [BANKS];

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    fhemem_bank #(.SUBARRAYS(SUBARRAYS), .ROWS(ROWS), .NUM_ADDERS(NUM_ADDERS), .T_ACT(T_ACT)) u_bank (
      .clk, .rst_n, .bank_id(3'(b)),
      .ca_valid, .ca_bank, .ca_data, .ca_ready(bank_ca_ready[b]),
      .conv_valid(conv_valid[b]), .conv_req, .conv_ready(conv_ready[b]),
      .link_in_valid(in_valid[b]), .link_in_data(in_data[b]), .link_in_ready(in_ready[b]),
      .link_out_valid(out_valid[b]), .link_out_data(out_data[b]), .link_out_ready(out_ready[b]),
      .idle(bank_idle[b]), .err(bank_err[b]), .reconf_count(b_reconf[b]), .par_peak(b_peak[b])
    );
  end

  // ---- inter-bank chain and channel IO ------------------------------------------------
  fhemem_chain #(.BANKS(BANKS), .GROUP(GROUP), .CHIO_CYCLES(CHIO_CYCLES)) u_chain (
    .clk, .rst_n, .route_valid, .route_src, .route_dst, .route_n, .route_ready,
    .out_valid, .out_data, .out_ready, .in_valid, .in_data, .in_ready,
    .host_wvalid, .host_wdata, .host_wready, .host_rvalid, .host_rdata,
    .idle(chain_idle), .n_link_blocks, .n_io_blocks
  );

  // ---- status -----------------------------------------------------------------------
  assign busy = up_busy || !cc_idle || !(&bank_idle) || !chain_idle;
  assign err  = |bank_err;
  always_comb begin
    n_reconf = '0;
    par_peak = '0;
    for (int b = 0; b < BANKS; b++) begin
      n_reconf = n_reconf + b_reconf[b];
      if (b_peak[b] > par_peak) par_peak = b_peak[b];
    end
  end

endmodule
