// tb_fhemem_subarray: self-checking test of one subarray (16 mats, 16 NMUs,
// the HDL and the subarray controller).
// Fills two rows through the global write path, multiplies row a by row b
// word by word in every mat (load, 64 shift&AND steps, store of both product
// halves) and checks the products, then checks the permute store, an HDL move
// with two transfers per segment (and its cycle count), a vertical-move
// destination write, and the cycle counts of LD and ADD against the command
// table (size/16 and #shifts).
module tb_fhemem_subarray;
  import fhemem_pkg::*;
  localparam int unsigned ROWS  = 8;
  localparam int unsigned T_ACT = 5;

  logic            clk = 1'b0;
  logic            rst_n = 1'b0;
  logic            req_valid;
  sa_req_t         req;
  logic            busy, done;
  logic [MATS-2:0] hdl_sw;
  logic [MATS-1:0] mdl_drv;
  beat_t           mdl_tx [MATS];
  beat_t           mdl_rx [MATS];
  logic            g_ready, g_valid, g_fire, hdl_conflict;
  int              checks = 0, failures = 0;
  int              cycles = 0;

  fhemem_subarray #(.ROWS(ROWS), .NUM_ADDERS(4), .T_ACT(T_ACT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [127:0] got, input logic [127:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // reference copy of the open rows, per mat and 16-bit beat
  beat_t model [MATS][ROWS][32];

  // issue one operation and wait for done; returns the cycles it took
  task automatic run(input sa_req_t q, output int took);
    int st;
    @(negedge clk);
    req = q; req_valid = 1'b1;
    @(negedge clk);
    req_valid = 1'b0;
    st = cycles;
    while (!done) @(negedge clk);
    took = cycles - st;
  endtask

  function automatic sa_req_t mk(sa_op_e op);
    sa_req_t q;
    q = '0; q.op = op;
    return q;
  endfunction

  task automatic act(input int row);
    sa_req_t q; int t;
    q = mk(SOP_ACT); q.row = 10'(row);
    run(q, t);
    checks++;
    if (t < T_ACT) begin failures++; $display("FAIL ACT took %0d < %0d", t, T_ACT); end
  endtask

  // write a whole row from the MDL side with random data
  task automatic fill_row(input int row);
    sa_req_t q;
    act(row);
    q = mk(SOP_GWR); q.beat0 = '0; q.nbeats = 6'd32;
    @(negedge clk);
    req = q; req_valid = 1'b1;
    @(negedge clk);
    req_valid = 1'b0;
    g_valid = 1'b1;
    for (int c = 0; c < 32; c++) begin
      for (int m = 0; m < MATS; m++) begin
        mdl_rx[m] = 16'($urandom);
        model[m][row][c] = mdl_rx[m];
      end
      @(negedge clk);
    end
    g_valid = 1'b0;
    while (busy) @(negedge clk);
  endtask

  // read the open row through the global path and compare with the model
  task automatic check_row(input int row, input string what);
    sa_req_t q;
    q = mk(SOP_GRD); q.beat0 = '0; q.nbeats = 6'd32;
    @(negedge clk);
    req = q; req_valid = 1'b1;
    @(negedge clk);
    req_valid = 1'b0;
    g_ready = 1'b1;
    #1;
    for (int c = 0; c < 32; c++) begin
      if (!g_fire) begin checks++; failures++; $display("FAIL no g_fire"); end
      for (int m = 0; m < MATS; m++)
        if (mdl_drv[m]) check(128'(mdl_tx[m]), 128'(model[m][row][c]), $sformatf("%s mat %0d beat %0d", what, m, c));
        else begin checks++; failures++; end
      @(negedge clk);
    end
    g_ready = 1'b0;
    while (busy) @(negedge clk);
  endtask

  function automatic word_t mword(int m, int row, int w);
    return {model[m][row][4*w+3], model[m][row][4*w+2], model[m][row][4*w+1], model[m][row][4*w]};
  endfunction
  task automatic set_word(int m, int row, int w, word_t v);
    for (int b = 0; b < 4; b++) model[m][row][4*w+b] = v[16*b +: 16];
  endtask

  initial begin
    sa_req_t q;
    int      t;
    logic [47:0] ids;
    req_valid = 1'b0; req = '0; hdl_sw = '0; g_ready = 1'b0; g_valid = 1'b0;
    for (int m = 0; m < MATS; m++) mdl_rx[m] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    fill_row(1);   // operand row a
    fill_row(2);   // operand row b
    check_row(2, "row b written");

    // ---- 4 multiplications per mat: a[k] * b[k], k = 0..3 ----------------------------
    act(1);
    q = mk(SOP_LD); q.cmd.col = 3'd0; q.cmd.latch_id = 3'd0; q.cmd.size = 3'd7;
    run(q, t);
    check(128'(t), 128'(32), "LD of 512 bits takes size/16 = 32 cycles");
    act(2);
    q = mk(SOP_LD); q.cmd.col = 3'd0; q.cmd.adder_id = 3'd0; q.cmd.size = 3'd3; q.cmd.to_adder = 1'b1;
    run(q, t);
    check(128'(t), 128'(16), "LD of 4 words to the adders takes 16 cycles");
    q = mk(SOP_ADD); q.cmd.latch_id = 3'd0; q.cmd.adder_id = 3'b101; q.cmd.sh_start = 6'd0; q.cmd.sh_end = 6'd63;
    run(q, t);
    check(128'(t), 128'(64), "64-bit multiply takes n = 64 add cycles");
    q = mk(SOP_ST); q.cmd.col = 3'd0; q.cmd.adder_id = 3'd0; q.cmd.size = 3'd3; q.cmd.to_adder = 1'b1;
    run(q, t);
    q.cmd.col = 3'd4; q.cmd.hi_half = 1'b1;
    run(q, t);
    for (int m = 0; m < MATS; m++)
      for (int k = 0; k < 4; k++) begin
        logic [127:0] p;
        p = 128'(mword(m, 1, k)) * 128'(mword(m, 2, k));
        set_word(m, 2, k, p[63:0]);
        set_word(m, 2, 4 + k, p[127:64]);
      end
    check_row(2, "products");

    // ---- constant multiply with a shifted add range: acc = b * (2^3 + 2^4 + 2^5) ------
    q = mk(SOP_ADD); q.cmd.adder_id = 3'b001; q.cmd.sh_start = 6'd3; q.cmd.sh_end = 6'd5;
    run(q, t);
    check(128'(t), 128'(3), "3 shift steps take 3 cycles");

    // ---- permute store: NMU m stores operand latch ids[m] to column 6 ---------------
    for (int m = 0; m < MATS; m++) ids[3*m +: 3] = 3'($urandom);
    q = mk(SOP_PST); q.cmd.col = 3'd6; q.cmd.pst_ids = ids;
    run(q, t);
    check(128'(t), 128'(4), "permute store takes 4 cycles");
    for (int m = 0; m < MATS; m++) set_word(m, 2, 6, mword(m, 1, int'(ids[3*m +: 3])));
    check_row(2, "permute store");

    // ---- HDL move, stride 2 (segments of 4 mats, 2 transfers each) ------------------
    for (int i = 0; i < MATS - 1; i++) hdl_sw[i] = ((i + 1) % 4) != 0;
    q = mk(SOP_HMOV); q.cmd.dir = 1'b0; q.cmd.stride = 2'd1; q.cmd.col = 3'd5; q.cmd.size = 3'd1;
    run(q, t);
    check(128'(t), 128'(2 * 8), "HMOV: 2 sequential transfers of 128 bits, 8 cycles each");
    for (int m = 0; m < MATS; m++)
      if (m % 4 < 2) begin
        set_word(m + 2, 2, 5, mword(m, 2, 5));
        set_word(m + 2, 2, 6, mword(m, 2, 6));
      end
    check(128'(hdl_conflict), 128'(0), "no HDL conflict");
    // reverse direction, stride 1 (segments of 2)
    for (int i = 0; i < MATS - 1; i++) hdl_sw[i] = ((i + 1) % 2) != 0;
    q = mk(SOP_HMOV); q.cmd.dir = 1'b1; q.cmd.stride = 2'd0; q.cmd.col = 3'd7; q.cmd.size = 3'd0;
    run(q, t);
    check(128'(t), 128'(4), "HMOV stride 1: one transfer of 64 bits");
    for (int m = 0; m < MATS; m += 2) set_word(m, 2, 7, mword(m + 1, 2, 7));
    check_row(2, "HDL moves");

    // ---- vertical move destination: write column 3 from the MDLs ---------------------
    q = mk(SOP_VDST); q.cmd.col = 3'd3; q.cmd.size = 3'd0;
    @(negedge clk);
    req = q; req_valid = 1'b1;
    for (int m = 0; m < MATS; m++) mdl_rx[m] = 16'(m * 257);
    @(negedge clk);
    req_valid = 1'b0;
    while (busy) @(negedge clk);
    for (int m = 0; m < MATS; m++) set_word(m, 2, 3, {4{16'(m * 257)}});
    check_row(2, "vertical move destination");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
