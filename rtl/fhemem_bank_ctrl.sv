// fhemem_bank_ctrl: bank-level controller. Decodes bank requests (NMU commands
// and the conventional activate / global read / global write), keeps the
// bookkeeping of which subarrays are busy, sets the isolation switches of the
// HDLs and MDLs, and dispatches subarray-level operations.
//
// Subarray-level parallelism: a request is dispatched as soon as the subarrays
// it needs are idle, so up to SUBARRAYS operations run at once. One request is
// accepted per cycle (req_valid/req_ready handshake, in order: a request that
// cannot start stalls the ones behind it).
//
// Switches. The HDL switches have one control signal per mat column, shared by
// all subarrays; the MDL switches one per subarray row, shared by all mat
// columns. An HMOV of stride 2**s needs the HDLs cut into aligned segments of
// 2**(s+1) mats; a VMOV of stride 2**s needs the MDLs cut into aligned segments
// of 2**(s+1) subarrays; a global access needs every MDL switch closed, through
// to the global sense amplifiers. When the required setting differs from the
// current one, the controller waits until no operation uses those lines, then
// spends one cycle per switch position (position = switch index mod 16) that
// changes; since a polynomial occupies a 16 x 16 mat array, this is at most 16
// cycles, as the paper states. The position rule is this design's reading of it.
//
// VMOV pairs subarray s with s + 2**stride (dir 0) or s - 2**stride (dir 1);
// the pair must lie in one aligned segment and no other VMOV may use the same
// segment. A VMOV whose partner is outside the bank or outside the segment is
// dropped and sets the sticky err flag (this design's choice).
module fhemem_bank_ctrl
  import fhemem_pkg::*;
#(
  parameter int unsigned SUBARRAYS = 512
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  req_valid,
  input  bank_req_t             req,
  output logic                  req_ready,
  // subarray dispatch (broadcast request, one-hot valid)
  output logic [SUBARRAYS-1:0]  sa_valid,
  output sa_req_t               sa_req,      // broadcast to every subarray
  output logic [SUBARRAYS-1:0]  sa_vdst,     // this subarray runs the receiving end (VDST)
  input  logic [SUBARRAYS-1:0]  sa_done,
  // switches
  output logic [MATS-2:0]       hdl_sw,
  output logic [SUBARRAYS-1:0]  mdl_sw,      // [i] joins subarray i and i+1; [S-1] joins the global path
  output logic [SUBARRAYS-1:0]  busy,        // subarray state bookkeeping
  output logic                  err,
  output logic                  glob_busy,   // a global read or write is running
  output logic                  glob_wr,     // ... and it is a write
  output logic [31:0]           reconf_count // switch reconfigurations done
);
  localparam int unsigned SW = $clog2(SUBARRAYS);

  // ---- bookkeeping ----------------------------------------------------------------
  logic [SUBARRAYS-1:0] hmov_act;   // subarrays running an HMOV
  logic [SUBARRAYS-1:0] vmov_act;   // subarrays running a VMOV (either end)
  logic [SUBARRAYS-1:0] glob_act;   // subarrays running a global access
  logic [4:0]           reconf_cnt;
  logic [MATS-2:0]      hdl_target;
  logic [SUBARRAYS-1:0] mdl_target;

  function automatic logic [MATS-2:0] hdl_pattern(logic [1:0] s);
    logic [MATS-2:0] p;
    for (int i = 0; i < MATS - 1; i++) p[i] = ((i + 1) & ((2 << s) - 1)) != 0;
    return p;
  endfunction
  function automatic logic [SUBARRAYS-1:0] mdl_pattern(logic [1:0] s);
    logic [SUBARRAYS-1:0] p;
    for (int i = 0; i < SUBARRAYS; i++) p[i] = (i < SUBARRAYS - 1) && (((i + 1) & ((2 << s) - 1)) != 0);
    return p;
  endfunction
  // one cycle per switch position (index mod 16) that changes
  function automatic logic [4:0] hdl_cost(logic [MATS-2:0] diff);
    logic [4:0] n;
    n = '0;
    for (int i = 0; i < MATS - 1; i++) n += 5'(diff[i]);
    return n;
  endfunction
  function automatic logic [4:0] mdl_cost(logic [SUBARRAYS-1:0] diff);
    logic [15:0] pos;
    logic [4:0]  n;
    pos = '0;
    for (int i = 0; i < SUBARRAYS; i++) pos[i % 16] |= diff[i];
    n = '0;
    for (int p = 0; p < 16; p++) n += 5'(pos[p]);
    return n;
  endfunction

  // ---- decode of the request at the head ---------------------------------------
  logic [SW-1:0]  s_idx, t_idx;
  logic           is_hmov, is_vmov, is_glob, vmov_bad;
  int unsigned    d;
  logic [SUBARRAYS-1:0] need_mdl;
  logic           same_seg_busy;

  always_comb begin
    s_idx    = req.cmd.subarray[SW-1:0];
    d        = 1 << req.cmd.stride;
    is_hmov  = (req.kind == BR_NMU) && (req.cmd.op == OP_HMOV);
    is_vmov  = (req.kind == BR_NMU) && (req.cmd.op == OP_VMOV);
    is_glob  = (req.kind == BR_GRD) || (req.kind == BR_GWR);
    t_idx    = req.cmd.dir ? SW'(s_idx - SW'(d)) : SW'(s_idx + SW'(d));
    vmov_bad = 1'b0;
    if (is_vmov) begin
      if (req.cmd.dir ? (int'(s_idx) < int'(d)) : (int'(s_idx) + int'(d) >= SUBARRAYS)) vmov_bad = 1'b1;
      else if ((s_idx >> (req.cmd.stride + 1)) != (t_idx >> (req.cmd.stride + 1))) vmov_bad = 1'b1;
    end
    if (int'(req.cmd.subarray) >= SUBARRAYS) vmov_bad = 1'b1;
    same_seg_busy = 1'b0;
    for (int u = 0; u < SUBARRAYS; u++)
      if (vmov_act[u] && (SW'(u) >> (req.cmd.stride + 1)) == (s_idx >> (req.cmd.stride + 1))) same_seg_busy = 1'b1;
    need_mdl = is_glob ? '1 : mdl_pattern(req.cmd.stride);
  end

  logic hdl_ok, mdl_ok, res_free, can_go, want_reconf;
  always_comb begin
    hdl_ok   = !is_hmov || (hdl_sw == hdl_pattern(req.cmd.stride));
    mdl_ok   = !(is_vmov || is_glob) || (mdl_sw == need_mdl);
    res_free = !busy[s_idx] && !(is_vmov && busy[t_idx]) &&
               !(is_vmov && same_seg_busy) && !(is_glob && (|glob_act || |vmov_act));
    can_go      = req_valid && (reconf_cnt == 0) && (vmov_bad || (hdl_ok && mdl_ok && res_free));
    want_reconf = req_valid && (reconf_cnt == 0) && !vmov_bad &&
                  ((!hdl_ok && !(|hmov_act)) || (!mdl_ok && !(|vmov_act) && !(|glob_act)));
  end
  assign req_ready = can_go;
  assign glob_busy = |glob_act;

  // ---- dispatch ---------------------------------------------------------------------------
  sa_req_t base;
  always_comb begin
    base        = '0;
    base.cmd    = req.cmd;
    base.row    = req.row;
    base.beat0  = req.beat0;
    base.nbeats = req.nbeats;
    unique case (req.kind)
      BR_ACT: base.op = SOP_ACT;
      BR_GRD: base.op = SOP_GRD;
      BR_GWR: base.op = SOP_GWR;
      default: begin
        unique case (req.cmd.op)
          OP_LD:   base.op = SOP_LD;
          OP_ST:   base.op = SOP_ST;
          OP_ADD:  base.op = SOP_ADD;
          OP_PST:  base.op = SOP_PST;
          OP_HMOV: base.op = SOP_HMOV;
          OP_VMOV: base.op = SOP_VSRC;
          default: base.op = SOP_NONE;
        endcase
      end
    endcase
    sa_req   = base;
    sa_valid = '0;
    sa_vdst  = '0;
    if (can_go && !vmov_bad) begin
      sa_valid[s_idx] = 1'b1;
      if (is_vmov) begin
        sa_valid[t_idx] = 1'b1;
        sa_vdst[t_idx]  = 1'b1;
      end
    end
  end

  // switch setting a reconfiguration moves to, and its cost in cycles
  logic [MATS-2:0]      ht;
  logic [SUBARRAYS-1:0] mt;
  logic [4:0]           c;
  always_comb begin
    ht = (is_hmov && !hdl_ok) ? hdl_pattern(req.cmd.stride) : hdl_sw;
    mt = ((is_vmov || is_glob) && !mdl_ok) ? need_mdl : mdl_sw;
    c  = hdl_cost(ht ^ hdl_sw) + mdl_cost(mt ^ mdl_sw);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0; hmov_act <= '0; vmov_act <= '0; glob_act <= '0;
      hdl_sw <= '0; mdl_sw <= '0; reconf_cnt <= '0; err <= 1'b0;
      hdl_target <= '0; mdl_target <= '0; reconf_count <= '0; glob_wr <= 1'b0;
    end else begin
      busy     <= (busy     | sa_valid) & ~sa_done;
      hmov_act <= (hmov_act | (is_hmov ? sa_valid : '0)) & ~sa_done;
      vmov_act <= (vmov_act | (is_vmov ? sa_valid : '0)) & ~sa_done;
      glob_act <= (glob_act | (is_glob ? sa_valid : '0)) & ~sa_done;
      if (can_go && vmov_bad) err <= 1'b1;
      if (can_go && is_glob) glob_wr <= (req.kind == BR_GWR);
      if (reconf_cnt != 0) begin
        reconf_cnt <= reconf_cnt - 1'b1;
        if (reconf_cnt == 1) begin
          hdl_sw <= hdl_target;
          mdl_sw <= mdl_target;
        end
      end else if (want_reconf) begin
        hdl_target      <= ht;
        mdl_target      <= mt;
        reconf_cnt      <= (c > 16) ? 5'd16 : c;
        reconf_count    <= reconf_count + 1;
      end
    end
  end

  // a subarray is never handed a second operation while busy
  always_ff @(posedge clk) if (rst_n) a_no_double_dispatch: assert ((sa_valid & busy) == '0);

endmodule
