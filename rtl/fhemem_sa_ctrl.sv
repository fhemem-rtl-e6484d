// fhemem_sa_ctrl: subarray controller, turns one subarray-level operation into
// per-cycle controls for the 16 mats and 16 NMUs of a subarray.
//
// The bank hands over one sa_req_t (req_valid for one cycle) while the subarray
// is idle; done pulses in the cycle after the last beat. Except for the permute
// store every NMU receives the same control, so one command drives all 16 mats
// in lock step (subarray-level SIMD). Sequences, with S = size+1 words:
//   ACT      open a row in all 16 mats, wait for the activation latency
//   LD / ST  4*S beats; beat t moves 16 bits of word (col + t/4) between the
//            open row and operand latch (latch_id + t/4) or, with to_adder,
//            adder register (adder_id + t/4)
//   ADD      one step per shift position sh_start..sh_end (#shifts cycles)
//   PST      4 beats; NMU i stores its operand latch pst_ids[i] at column col
//   HMOV     stride d = 2**stride. The HDL is cut into segments of 2d mats; the
//            d transfers inside one segment share it and run one after another
//            (d rounds of 4*S beats). In round r the mat at offset r of each
//            segment sends to offset r+d (dir = 0), or offset r+d sends to r
//            (dir = 1). Data goes SA -> LDL -> NMU -> HDL -> NMU -> LDL -> SA.
//   VSRC /   4*S beats on the MDLs, in lock step with the partner subarray
//   VDST     that the bank starts in the same cycle
//   GRD/GWR  nbeats 256-bit blocks between the open row and the bank's global
//            path over the MDLs, one per g_ready / g_valid handshake
// Column addresses wrap within the 8-word row.
//
// From the paper: the command set, 16-bit beats (size/16 cycles per transfer),
// #shifts cycles per add, 4 cycles per permute store, sequential transfers that
// share an HDL segment. The sender/receiver pattern inside a segment and the
// wrap-around are this design's choices.
module fhemem_sa_ctrl
  import fhemem_pkg::*;
#(
  parameter int unsigned ROWS = 128
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   req_valid,
  input  sa_req_t                req,
  output logic                   busy,
  output logic                   done,
  // mats
  output logic                   mat_act,
  output logic [$clog2(ROWS)-1:0] mat_row,
  input  logic                   mat_busy,
  output logic [4:0]             beat_addr,
  // NMUs
  output nmu_ctl_t               ctl [MATS],
  output logic [MATS-1:0]        hdl_drv,
  output logic [MATS-1:0]        mdl_drv,
  // global path handshake (GRD: data offered, GWR: data present)
  input  logic                   g_ready,
  input  logic                   g_valid,
  output logic                   g_fire
);
  typedef enum logic [1:0] {S_IDLE, S_ACT, S_ACTW, S_RUN} st_e;
  st_e        st;
  sa_req_t    r;
  logic [6:0] cnt;    // beat or step within a round
  logic [3:0] rnd;    // round (HMOV)
  logic [6:0] nbeat;  // beats (or steps) per round
  logic [3:0] nrnd;

  assign busy = (st != S_IDLE);

  // per-operation beat count
  function automatic logic [6:0] beats_of(sa_req_t q);
    logic [6:0] n;
    unique case (q.op)
      SOP_ADD:  n = (q.cmd.sh_end >= q.cmd.sh_start) ? 7'(q.cmd.sh_end - q.cmd.sh_start) + 7'd1 : 7'd1;
      SOP_PST:  n = 7'd4;
      SOP_GRD, SOP_GWR: n = 7'(q.nbeats);
      default:  n = 7'((q.cmd.size + 4'd1) * 4);
    endcase
    return n;
  endfunction

  logic step;  // the current beat completes this cycle
  always_comb begin
    step = (st == S_RUN);
    if (r.op == SOP_GRD) step = (st == S_RUN) && g_ready;
    if (r.op == SOP_GWR) step = (st == S_RUN) && g_valid;
  end
  assign g_fire = step && (r.op == SOP_GRD || r.op == SOP_GWR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; r <= '0; cnt <= '0; rnd <= '0; nbeat <= '0; nrnd <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (req_valid) begin
          r     <= req;
          cnt   <= '0;
          rnd   <= '0;
          nbeat <= beats_of(req);
          nrnd  <= (req.op == SOP_HMOV) ? 4'(1 << req.cmd.stride) : 4'd1;
          st    <= (req.op == SOP_ACT) ? S_ACT :
                   (req.op == SOP_NONE) ? S_IDLE : S_RUN;
          if (req.op == SOP_NONE) done <= 1'b1;
        end
        S_ACT:  st <= S_ACTW;
        S_ACTW: if (!mat_busy) begin st <= S_IDLE; done <= 1'b1; end
        S_RUN:  if (step) begin
          if (cnt == nbeat - 1) begin
            cnt <= '0;
            if (rnd == nrnd - 1) begin st <= S_IDLE; done <= 1'b1; end
            else rnd <= rnd + 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign mat_act = (st == S_ACT);
  assign mat_row = r.row[$clog2(ROWS)-1:0];

  // ---- per-cycle controls ------------------------------------------------------
  logic [2:0] w;   // word offset of this beat
  logic [1:0] b;   // beat within the word
  assign w = cnt[4:2];
  assign b = cnt[1:0];

  always_comb begin
    int unsigned d;
    d = 1 << r.cmd.stride;
    beat_addr = {3'(r.cmd.col + w), b};
    if (r.op == SOP_PST) beat_addr = {r.cmd.col, b};
    if (r.op == SOP_GRD || r.op == SOP_GWR) beat_addr = r.beat0 + cnt[4:0];
    hdl_drv = '0;
    mdl_drv = '0;
    for (int m = 0; m < MATS; m++) begin
      nmu_ctl_t c;
      int unsigned off;
      c       = '0;
      c.beat  = b;
      c.space = r.cmd.to_adder ? (r.op == SOP_ST ? (r.cmd.hi_half ? SP_ACC_HI : SP_ACC_LO) : SP_ADB) : SP_OPL;
      c.word  = r.cmd.to_adder ? 3'(r.cmd.adder_id + w) : 3'(r.cmd.latch_id + w);
      off     = m % (2 * d);
      if (st == S_RUN) begin
        unique case (r.op)
          SOP_LD:  begin c.lat_we = 1'b1; c.lat_src = SRC_LDL; end
          SOP_ST:  begin c.mat_we = 1'b1; c.mat_src = WR_LATCH; end
          SOP_ADD: begin
            c.add_en  = 1'b1;
            c.add_bit = 6'(7'(r.cmd.sh_start) + cnt);
            c.add_and = r.cmd.adder_id[2];
            c.add_sub = r.cmd.adder_id[1];
            c.add_clr = r.cmd.adder_id[0] && (cnt == 0);
            c.add_lat = r.cmd.latch_id;
          end
          SOP_PST: begin
            c.space   = SP_OPL;
            c.word    = r.cmd.pst_ids[3*m +: 3];
            c.mat_we  = 1'b1;
            c.mat_src = WR_LATCH;
          end
          SOP_HMOV: begin
            // sender / receiver offsets within the segment for this round
            if (off == (r.cmd.dir ? rnd + d : rnd)) begin
              c.tx_src   = TX_LDL;
              hdl_drv[m] = 1'b1;
            end
            if (off == (r.cmd.dir ? rnd : rnd + d)) begin
              c.mat_we  = 1'b1;
              c.mat_src = WR_HDL;
            end
          end
          SOP_VSRC, SOP_GRD: begin
            c.tx_src   = TX_LDL;
            mdl_drv[m] = 1'b1;
          end
          SOP_VDST: begin c.mat_we = 1'b1; c.mat_src = WR_MDL; end
          SOP_GWR:  begin c.mat_we = g_valid; c.mat_src = WR_MDL; end
          default: ;
        endcase
      end
      ctl[m] = c;
    end
  end

endmodule
