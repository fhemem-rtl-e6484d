// fhemem_bank: one DRAM bank with near-mat processing.
//
// The bank is SUBARRAYS subarrays of 16 mats. Every mat column has a master
// data line (MDL) running through all subarrays to the bank's global sense
// amplifiers; its switches (one control per subarray row) cut it into segments
// for vertical moves. The 16 MDLs together form the 256-bit global path, which
// ends in the bank's transfer buffer (fhemem_xbuf). From there blocks go to a
// neighbouring bank over the 256-bit chain link or to the channel IO
// (link_out), and blocks from outside enter the same way (link_in).
//
// Inputs: NMU commands arrive on the 16-bit C/A bus and are assembled by
// fhemem_ca_des; activations and global reads/writes of 256-bit blocks come as
// bank_req_t on conv_*. NMU commands take priority when both are present. The
// bank controller dispatches both to the subarrays.
//
// A global read (GRD) streams blocks of the open row of one subarray into the
// transfer buffer, one per cycle while it has room; a global write (GWR) writes
// blocks from the transfer buffer into the open row. While a global write runs,
// link_out is held off; while a global read runs, link_in is held off.
module fhemem_bank
  import fhemem_pkg::*;
#(
  parameter int unsigned SUBARRAYS  = 512,
  parameter int unsigned ROWS       = 128,
  parameter int unsigned NUM_ADDERS = 4,
  parameter int unsigned T_ACT      = 15
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [2:0]  bank_id,      // position of the bank in the channel (strap)
  // command/address bus
  input  logic        ca_valid,
  input  logic [2:0]  ca_bank,
  input  logic [15:0] ca_data,
  output logic        ca_ready,
  // conventional row / column commands
  input  logic        conv_valid,
  input  bank_req_t   conv_req,
  output logic        conv_ready,
  // transfer buffer ports
  input  logic        link_in_valid,
  input  block_t      link_in_data,
  output logic        link_in_ready,
  output logic        link_out_valid,
  output block_t      link_out_data,
  input  logic        link_out_ready,
  // status
  output logic        idle,
  output logic        err,
  output logic [31:0] reconf_count,
  output logic [31:0] par_peak      // most subarrays seen busy at once
);
  // ---- command intake ------------------------------------------------------------
  logic        des_valid, des_ready;
  logic [63:0] des_word;
  fhemem_ca_des u_des (
    .clk, .rst_n, .bank_id, .ca_valid, .ca_bank, .ca_data, .ca_ready,
    .cmd_valid(des_valid), .cmd_word(des_word), .cmd_ready(des_ready)
  );

  logic      req_valid, req_ready;
  bank_req_t req;
  always_comb begin
    req = conv_req;
    if (des_valid) begin
      req      = '0;
      req.kind = BR_NMU;
      req.cmd  = decode_cmd(des_word);
    end
  end
  assign req_valid  = des_valid || conv_valid;
  assign des_ready  = req_ready && des_valid;
  assign conv_ready = req_ready && !des_valid;

  // ---- controller -----------------------------------------------------------------
  logic [SUBARRAYS-1:0] sa_valid, sa_done, busy, mdl_sw;
  sa_req_t              sa_req;
  logic [SUBARRAYS-1:0] sa_vdst;
  logic [MATS-2:0]      hdl_sw;
  logic                 glob_busy, glob_wr;

  fhemem_bank_ctrl #(.SUBARRAYS(SUBARRAYS)) u_ctrl (
    .clk, .rst_n, .req_valid, .req, .req_ready, .sa_valid, .sa_req, .sa_vdst, .sa_done,
    .hdl_sw, .mdl_sw, .busy, .err, .glob_busy, .glob_wr, .reconf_count
  );

  // ---- subarrays and MDLs -------------------------------------------------------------
  logic [MATS-1:0]      sa_mdl_drv [SUBARRAYS];
  beat_t                sa_mdl_tx  [SUBARRAYS][MATS];
  beat_t                sa_mdl_rx  [SUBARRAYS][MATS];
  logic [SUBARRAYS-1:0] sa_fire;
  logic                 g_ready, g_valid, g_fire;
  block_t               gsa_rd;
  block_t               xb_head;
  logic                 xb_empty, xb_full;
  logic [MATS-1:0]      mdl_conflict;
  logic [SUBARRAYS-1:0] hdl_conflict;
  logic [SUBARRAYS-1:0] sa_busy;

  for (genvar s = 0; s < SUBARRAYS; s++) begin : g_sa
    sa_req_t r;
    always_comb begin
      r = sa_req;
      if (sa_vdst[s]) r.op = SOP_VDST;
    end
    fhemem_subarray #(.ROWS(ROWS), .NUM_ADDERS(NUM_ADDERS), .T_ACT(T_ACT)) u_sa (
      .clk, .rst_n, .req_valid(sa_valid[s]), .req(r), .busy(sa_busy[s]), .done(sa_done[s]),
      .hdl_sw, .mdl_drv(sa_mdl_drv[s]), .mdl_tx(sa_mdl_tx[s]), .mdl_rx(sa_mdl_rx[s]),
      .g_ready, .g_valid, .g_fire(sa_fire[s]), .hdl_conflict(hdl_conflict[s])
    );
  end

  for (genvar j = 0; j < MATS; j++) begin : g_mdl
    logic [SUBARRAYS:0] drv_en;
    beat_t              drv_data [SUBARRAYS+1];
    beat_t              rx_data  [SUBARRAYS+1];
    always_comb begin
      for (int s = 0; s < SUBARRAYS; s++) begin
        drv_en[s]   = sa_mdl_drv[s][j];
        drv_data[s] = sa_mdl_tx[s][j];
      end
      drv_en[SUBARRAYS]   = glob_busy && glob_wr;
      drv_data[SUBARRAYS] = xb_head[j*BEAT_W +: BEAT_W];
    end
    fhemem_seg_link #(.NODES(SUBARRAYS + 1), .W(BEAT_W)) u_mdl (
      .drv_en, .drv_data, .sw(mdl_sw), .rx_data, .conflict(mdl_conflict[j])
    );
    for (genvar s = 0; s < SUBARRAYS; s++) begin : g_rx
      assign sa_mdl_rx[s][j] = rx_data[s];
    end
    assign gsa_rd[j*BEAT_W +: BEAT_W] = rx_data[SUBARRAYS];
  end

  // ---- transfer buffer --------------------------------------------------------------
  logic grd, gwr, xb_push, xb_pop;
  assign grd     = glob_busy && !glob_wr;
  assign gwr     = glob_busy && glob_wr;
  assign g_fire  = |sa_fire;
  assign g_ready = grd && !xb_full;
  assign g_valid = gwr && !xb_empty;

  assign link_in_ready  = !grd && !xb_full;
  assign link_out_valid = !gwr && !xb_empty;
  assign link_out_data  = xb_head;
  assign xb_push = (grd && g_fire) || (link_in_valid && link_in_ready);
  assign xb_pop  = (gwr && g_fire) || (link_out_valid && link_out_ready);

  fhemem_xbuf u_xbuf (
    .clk, .rst_n, .push(xb_push), .push_data(grd ? gsa_rd : link_in_data),
    .pop(xb_pop), .head(xb_head), .empty(xb_empty), .full(xb_full)
  );

  assign idle = (busy == '0) && !des_valid && xb_empty;

  // ---- parallelism statistics -----------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) par_peak <= '0;
    else if (32'($countones(busy)) > par_peak) par_peak <= 32'($countones(busy));
  end

  // the bank's bookkeeping agrees with the subarrays' own state
  always_ff @(posedge clk) if (rst_n) a_bookkeeping: assert ((sa_busy & ~busy) == '0);
  always_ff @(posedge clk) if (rst_n) a_hdl_one_driver: assert (hdl_conflict == '0);
  always_ff @(posedge clk) if (rst_n) a_mdl_one_driver: assert (mdl_conflict == '0);

endmodule
