// tb_fhemem_nmu: self-checking test of the near-mat unit.
// Loads operands beat by beat from the LDL, HDL and MDL inputs, runs 64
// shift&AND steps and checks the 128-bit product of every adder against the
// testbench's own multiplication, runs a low-Hamming-weight constant
// multiplication (add and subtract steps without the mask), and reads results
// back through the mat write port and the pass-through output.
module tb_fhemem_nmu;
  import fhemem_pkg::*;
  localparam int unsigned M = 4;

  logic     clk = 1'b0;
  logic     rst_n = 1'b0;
  nmu_ctl_t ctl;
  beat_t    ldl_rd, hdl_rx, mdl_rx, tx, mat_wd;
  logic     mat_we;
  int       checks = 0, failures = 0;
  int       cycles = 0;

  fhemem_nmu #(.NUM_ADDERS(M)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (20000) @(posedge clk);
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

  // write one 64-bit word into a latch space, 4 beats, from the given source
  task automatic load_word(input lat_space_e sp, input int w, input word_t v, input beat_src_e src);
    for (int b = 0; b < 4; b++) begin
      ctl         = '0;
      ctl.lat_we  = 1'b1;
      ctl.space   = sp;
      ctl.word    = 3'(w);
      ctl.beat    = 2'(b);
      ctl.lat_src = src;
      ldl_rd = 16'hdead; hdl_rx = 16'hbeef; mdl_rx = 16'hcafe;
      if (src == SRC_LDL) ldl_rd = v[16*b +: 16];
      if (src == SRC_HDL) hdl_rx = v[16*b +: 16];
      if (src == SRC_MDL) mdl_rx = v[16*b +: 16];
      @(posedge clk); #1;
    end
    ctl = '0;
  endtask

  // read a word back through the mat write port (4 beats)
  task automatic read_word(input lat_space_e sp, input int w, output word_t v);
    for (int b = 0; b < 4; b++) begin
      ctl         = '0;
      ctl.space   = sp;
      ctl.word    = 3'(w);
      ctl.beat    = 2'(b);
      ctl.mat_we  = 1'b1;
      ctl.mat_src = WR_LATCH;
      #1;
      v[16*b +: 16] = mat_wd;
      checks++;
      if (!mat_we) begin failures++; $display("FAIL mat_we low"); end
      @(posedge clk); #1;
    end
    ctl = '0;
  endtask

  word_t a [M];
  word_t bb [M];
  word_t r;
  logic [127:0] exp;

  initial begin
    ctl = '0; ldl_rd = '0; hdl_rx = '0; mdl_rx = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;

    for (int rep = 0; rep < 4; rep++) begin
      // operands: a in operand latches 2..5, b in the adder registers
      for (int k = 0; k < M; k++) begin
        a[k]  = {$urandom, $urandom};
        bb[k] = {$urandom, $urandom};
        if (rep == 0 && k == 0) begin a[k] = '1; bb[k] = '1; end
        load_word(SP_OPL, 2 + k, a[k], beat_src_e'((k + rep) % 3));
        load_word(SP_ADB, k, bb[k], SRC_LDL);
      end
      // 64 shift&AND steps, the first clears the accumulator
      for (int i = 0; i < 64; i++) begin
        ctl         = '0;
        ctl.add_en  = 1'b1;
        ctl.add_bit = 6'(i);
        ctl.add_and = 1'b1;
        ctl.add_clr = (i == 0);
        ctl.add_lat = 3'd2;
        @(posedge clk); #1;
      end
      ctl = '0;
      for (int k = 0; k < M; k++) begin
        word_t lo, hi;
        read_word(SP_ACC_LO, k, lo);
        read_word(SP_ACC_HI, k, hi);
        exp = 128'(a[k]) * 128'(bb[k]);
        check({hi, lo}, exp, $sformatf("product rep %0d adder %0d", rep, k));
      end
    end

    // constant multiplication b * (2^40 - 2^17 + 1) in three unmasked steps
    begin
      int st;
      st = cycles;
      for (int s = 0; s < 3; s++) begin
        ctl         = '0;
        ctl.add_en  = 1'b1;
        ctl.add_bit = (s == 0) ? 6'd0 : (s == 1) ? 6'd40 : 6'd17;
        ctl.add_clr = (s == 0);
        ctl.add_sub = (s == 2);
        @(posedge clk); #1;
      end
      ctl = '0;
      checks++;
      if (cycles - st != 3) begin failures++; $display("FAIL constant multiply took %0d steps", cycles - st); end
      for (int k = 0; k < M; k++) begin
        word_t lo, hi;
        read_word(SP_ACC_LO, k, lo);
        read_word(SP_ACC_HI, k, hi);
        exp = 128'(bb[k]) * ((128'(1) << 40) - (128'(1) << 17) + 128'(1));
        check({hi, lo}, exp, $sformatf("constant product adder %0d", k));
      end
    end

    // operand latch read-back and the LDL pass-through output
    read_word(SP_OPL, 3, r);
    check(128'(r), 128'(a[1]), "operand latch read-back");
    ctl = '0; ctl.tx_src = TX_LDL; ldl_rd = 16'h1234; #1;
    check(128'(tx), 128'h1234, "pass-through to HDL/MDL");
    ctl.tx_src = TX_LATCH; ctl.space = SP_OPL; ctl.word = 3'd2; ctl.beat = 2'd3; #1;
    check(128'(tx), 128'(a[0][63:48]), "latch beat to HDL/MDL");
    ctl.mat_src = WR_HDL; hdl_rx = 16'h5a5a; #1;
    check(128'(mat_wd), 128'h5a5a, "mat write from HDL");
    ctl.mat_src = WR_MDL; mdl_rx = 16'ha5a5; #1;
    check(128'(mat_wd), 128'ha5a5, "mat write from MDL");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
