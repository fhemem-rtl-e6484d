// fhemem_pkg: constants, command encodings and control structures shared by the
// near-mat processing blocks.
//
// The memory organisation follows the ARx4 configuration with 4k-wide adders per
// subarray: each mat row holds 512 bits (eight 64-bit words), every mat talks to
// its near-mat unit (NMU) over 16-bit local data lines, and a row therefore
// moves in 32 beats of 16 bits. The NMU command word is 32 bits (64 bits for the
// permute store) with a 3-bit opcode and a 10-bit subarray field; the field
// widths are the published ones, the bit placement (MSB first, fields packed in
// the printed order, unused bits at the bottom) is this design's choice.
package fhemem_pkg;

  // ---- data geometry -------------------------------------------------------
  localparam int unsigned WORD_W        = 64;  // every NMU command works on 64-bit data
  localparam int unsigned BEAT_W        = 16;  // LDL / MDL / HDL width
  localparam int unsigned BEATS_PER_WORD = WORD_W / BEAT_W;      // 4
  localparam int unsigned ROW_BITS      = 512; // bits per mat row
  localparam int unsigned ROW_WORDS     = ROW_BITS / WORD_W;     // 8
  localparam int unsigned ROW_BEATS     = ROW_BITS / BEAT_W;     // 32
  localparam int unsigned MATS          = 16;  // mats per subarray
  localparam int unsigned BLOCK_W       = MATS * BEAT_W;         // 256-bit MDL/GSA block
  localparam int unsigned SA_ADDR_W     = 10;  // subarray field of a command

  typedef logic [BEAT_W-1:0]  beat_t;
  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [BLOCK_W-1:0] block_t;

  // ---- NMU command opcodes (3 bits) ---------------------------------------
  typedef enum logic [2:0] {
    OP_LD   = 3'd0,  // SA columns -> NMU latches
    OP_ST   = 3'd1,  // NMU latches -> SA columns
    OP_HMOV = 3'd2,  // mat -> mat in one subarray over HDLs
    OP_VMOV = 3'd3,  // subarray -> subarray over MDLs
    OP_ADD  = 3'd4,  // shift / AND / add steps
    OP_PST  = 3'd5,  // permute store, one latch id per NMU
    OP_RSV6 = 3'd6,  // reserved
    OP_RSV7 = 3'd7   // reserved
  } nmu_op_e;

  // Decoded NMU command (union of every format's fields).
  typedef struct packed {
    nmu_op_e                 op;
    logic [SA_ADDR_W-1:0]    subarray;
    logic [2:0]              col;       // 64-bit column of the 512-bit row
    logic [2:0]              latch_id;
    logic [2:0]              adder_id;  // ld/st: first adder; add: {and_en, sub, clr}
    logic [2:0]              size;      // number of 64-bit words minus one
    logic                    to_adder;  // ld/st: use adder registers instead of operand latches
    logic                    hi_half;   // st from adders: upper 64 bits of the accumulator
    logic                    dir;       // hmov/vmov: 0 = towards higher index
    logic [1:0]              stride;    // hmov/vmov: distance 2**stride
    logic [5:0]              sh_start;  // add: first shift step
    logic [5:0]              sh_end;    // add: last shift step
    logic [MATS*3-1:0]       pst_ids;   // pst: latch id of NMU i at [3i+2:3i]
  } nmu_cmd_t;

  // Length of a command on the 16-bit C/A bus, in beats.
  function automatic int unsigned cmd_beats(nmu_op_e op);
    return (op == OP_PST) ? 4 : 2;
  endfunction

  // 64-bit command word (32-bit formats live in [63:32]) -> decoded fields.
  function automatic nmu_cmd_t decode_cmd(logic [63:0] w);
    nmu_cmd_t c;
    c          = '0;
    c.op       = nmu_op_e'(w[63:61]);
    c.subarray = w[60:51];
    unique case (c.op)
      OP_LD, OP_ST: begin
        c.col      = w[50:48];
        c.latch_id = w[47:45];
        c.adder_id = w[44:42];
        c.size     = w[41:39];
        c.to_adder = w[38];
        c.hi_half  = w[37];
      end
      OP_HMOV, OP_VMOV: begin
        c.dir    = w[50];
        c.stride = w[49:48];
        c.col    = w[47:45];
        c.size   = w[44:42];
      end
      OP_ADD: begin
        c.latch_id = w[50:48];
        c.adder_id = w[47:45];
        c.sh_start = w[44:39];
        c.sh_end   = w[38:33];
      end
      OP_PST: begin
        c.col     = w[50:48];
        c.pst_ids = w[47:0];
      end
      default: ;
    endcase
    return c;
  endfunction

  // Encoders, used by testbenches and micro-programs.
  function automatic logic [63:0] enc_ldst(nmu_op_e op, logic [9:0] sa, logic [2:0] col,
                                           logic [2:0] lat, logic [2:0] add, logic [2:0] size,
                                           logic to_adder, logic hi);
    return {op, sa, col, lat, add, size, to_adder, hi, 37'd0};
  endfunction
  function automatic logic [63:0] enc_mov(nmu_op_e op, logic [9:0] sa, logic dir,
                                          logic [1:0] stride, logic [2:0] col, logic [2:0] size);
    return {op, sa, dir, stride, col, size, 42'd0};
  endfunction
  function automatic logic [63:0] enc_add(logic [9:0] sa, logic [2:0] lat, logic and_en,
                                          logic sub, logic clr, logic [5:0] s0, logic [5:0] s1);
    return {OP_ADD, sa, lat, and_en, sub, clr, s0, s1, 33'd0};
  endfunction
  function automatic logic [63:0] enc_pst(logic [9:0] sa, logic [2:0] col, logic [47:0] ids);
    return {OP_PST, sa, col, ids};
  endfunction

  // ---- NMU per-cycle control ------------------------------------------------
  typedef enum logic [1:0] {SP_OPL = 2'd0, SP_ADB = 2'd1, SP_ACC_LO = 2'd2, SP_ACC_HI = 2'd3} lat_space_e;
  typedef enum logic [1:0] {SRC_LDL = 2'd0, SRC_HDL = 2'd1, SRC_MDL = 2'd2} beat_src_e;
  typedef enum logic [1:0] {WR_LATCH = 2'd0, WR_HDL = 2'd1, WR_MDL = 2'd2} mat_src_e;
  typedef enum logic {TX_LATCH = 1'b0, TX_LDL = 1'b1} tx_src_e;

  typedef struct packed {
    logic       lat_we;     // write the selected beat into a latch
    lat_space_e space;      // latch space for read and write
    logic [2:0] word;       // word within the space
    logic [1:0] beat;       // 16-bit beat within the word
    beat_src_e  lat_src;    // where a latch write comes from
    logic       mat_we;     // write a beat into the mat's open row
    mat_src_e   mat_src;    // where the mat write comes from
    tx_src_e    tx_src;     // what the NMU drives towards HDL / MDL
    logic       add_en;     // one shift/AND/add step in every adder
    logic [5:0] add_bit;    // shift amount of this step
    logic       add_and;    // mask the shifted operand with bit add_bit of the paired latch
    logic       add_sub;    // subtract instead of add
    logic       add_clr;    // accumulator starts from zero in this step
    logic [2:0] add_lat;    // adder k pairs with operand latch add_lat+k
  } nmu_ctl_t;

  // ---- subarray-level operations (bank -> subarray) -----------------------
  typedef enum logic [3:0] {
    SOP_NONE, SOP_ACT, SOP_LD, SOP_ST, SOP_ADD, SOP_PST, SOP_HMOV,
    SOP_VSRC, SOP_VDST, SOP_GRD, SOP_GWR
  } sa_op_e;

  typedef struct packed {
    sa_op_e      op;
    nmu_cmd_t    cmd;       // NMU command fields
    logic [9:0]  row;       // ACT: row to open
    logic [4:0]  beat0;     // GRD/GWR: first 16-bit column (beat) of the row
    logic [5:0]  nbeats;    // GRD/GWR: number of beats, 1..32
  } sa_req_t;

  // ---- bank requests (channel -> bank) ---------------------------------------
  typedef enum logic [1:0] {BR_NMU = 2'd0, BR_ACT = 2'd1, BR_GRD = 2'd2, BR_GWR = 2'd3} br_kind_e;

  typedef struct packed {
    br_kind_e    kind;
    nmu_cmd_t    cmd;       // cmd.subarray addresses the subarray for every kind
    logic [9:0]  row;       // ACT
    logic [4:0]  beat0;     // GRD/GWR first 256-bit block of the row
    logic [5:0]  nbeats;    // GRD/GWR number of blocks
  } bank_req_t;

  // ---- channel micro-operations ---------------------------------------------
  typedef enum logic [2:0] {
    UOP_NMU = 3'd0,   // NMU command word in payload
    UOP_ACT = 3'd1,   // open row payload[50:41] of subarray payload[60:51]
    UOP_RD  = 3'd2,   // read 256-bit block, beat payload[50:46], to the channel IO
    UOP_WR  = 3'd3,   // write 256-bit block from the channel IO
    UOP_XFR = 3'd4,   // row transfer to bank payload[50:48], subarray payload[47:38]
    UOP_BAR = 3'd5,   // wait until every bank is idle
    UOP_END = 3'd7    // end of micro-program
  } uop_kind_e;

  typedef struct packed {
    uop_kind_e   kind;
    logic [2:0]  bank;
    logic [1:0]  rsv;
    logic [63:0] payload;
  } uop_t;  // 72 bits

endpackage
