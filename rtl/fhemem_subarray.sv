// fhemem_subarray: one subarray, i.e. a row of 16 mats, each with its near-mat
// unit, joined by the subarray's horizontal data line (HDL), and run by its
// subarray controller.
//
// The subarray executes one subarray-level operation at a time (req_valid while
// idle, done pulse at the end). Its open row is held in the mats' sense
// amplifiers, so different subarrays of a bank keep different rows open and
// work in parallel. The HDL switches are set by the bank (one control signal per
// mat column, shared by all subarrays, hdl_sw). Towards the bank each mat
// column has a 16-bit MDL tap: mdl_drv/mdl_tx is what this subarray drives,
// mdl_rx what the MDL segment carries; the 16 taps together form the 256-bit
// block of the global path.
//
// Timing: an operation starts the cycle after req_valid; beats of LD/ST/moves
// take one cycle each; done comes one cycle after the last beat.
module fhemem_subarray
  import fhemem_pkg::*;
#(
  parameter int unsigned ROWS       = 128,
  parameter int unsigned NUM_ADDERS = 4,
  parameter int unsigned T_ACT      = 15
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  input  sa_req_t          req,
  output logic             busy,
  output logic             done,
  input  logic [MATS-2:0]  hdl_sw,
  output logic [MATS-1:0]  mdl_drv,
  output beat_t            mdl_tx [MATS],
  input  beat_t            mdl_rx [MATS],
  input  logic             g_ready,
  input  logic             g_valid,
  output logic             g_fire,
  output logic             hdl_conflict
);
  nmu_ctl_t                ctl [MATS];
  logic [MATS-1:0]         hdl_drv;
  logic                    mat_act;
  logic [$clog2(ROWS)-1:0] mat_row;
  logic [MATS-1:0]         mat_busy;
  logic [4:0]              beat_addr;
  beat_t                   ldl_rd [MATS];
  beat_t                   mat_wd [MATS];
  logic [MATS-1:0]         mat_we;
  beat_t                   tx     [MATS];
  beat_t                   hdl_rx [MATS];

  fhemem_sa_ctrl #(.ROWS(ROWS)) u_ctrl (
    .clk, .rst_n, .req_valid, .req, .busy, .done,
    .mat_act, .mat_row, .mat_busy(mat_busy[0]), .beat_addr,
    .ctl, .hdl_drv, .mdl_drv, .g_ready, .g_valid, .g_fire
  );

  for (genvar m = 0; m < MATS; m++) begin : g_mat
    fhemem_mat #(.ROWS(ROWS), .COLS(ROW_BITS), .T_ACT(T_ACT)) u_mat (
      .clk, .rst_n, .act(mat_act), .act_row(mat_row), .busy(mat_busy[m]),
      .beat_addr, .rdata(ldl_rd[m]), .we(mat_we[m]), .wdata(mat_wd[m])
    );
    fhemem_nmu #(.NUM_ADDERS(NUM_ADDERS)) u_nmu (
      .clk, .rst_n, .ctl(ctl[m]), .ldl_rd(ldl_rd[m]), .hdl_rx(hdl_rx[m]),
      .mdl_rx(mdl_rx[m]), .tx(tx[m]), .mat_we(mat_we[m]), .mat_wd(mat_wd[m])
    );
  end

  fhemem_seg_link #(.NODES(MATS), .W(BEAT_W)) u_hdl (
    .drv_en(hdl_drv), .drv_data(tx), .sw(hdl_sw), .rx_data(hdl_rx), .conflict(hdl_conflict)
  );

  assign mdl_tx = tx;

  always_ff @(posedge clk) if (rst_n) a_hdl_one_driver: assert (!hdl_conflict);

endmodule
