// tb_fhemem_mat: checks the mat model. Rows are opened with act (busy must last
// T_ACT cycles), written beat by beat through the sense amplifiers and read back
// after other rows were opened in between, against a row-array model. The row
// length (32 beats of 16 bits) and the activation latency are checked.
module tb_fhemem_mat;
  localparam int ROWS = 16, T_ACT = 15;
  logic clk = 0, rst_n = 0;
  logic act = 0, busy, we = 0;
  logic [3:0] act_row = 0;
  logic [4:0] beat_addr = 0;
  logic [15:0] rdata, wdata = 0;
  logic [15:0] model [ROWS][32];
  int checks = 0, failures = 0;

  fhemem_mat #(.ROWS(ROWS), .COLS(512), .T_ACT(T_ACT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic open_row(int r);
    int n;
    @(negedge clk); act = 1; act_row = 4'(r);
    @(negedge clk); act = 0;
    n = 0;
    while (busy) begin @(negedge clk); n++; end
    checks++;
    if (n != T_ACT) begin failures++; $display("busy for %0d cycles, expected %0d", n, T_ACT); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      open_row(r);
      for (int b = 0; b < 32; b++) begin
        @(negedge clk); we = 1; beat_addr = 5'(b); wdata = 16'($urandom); model[r][b] = wdata;
      end
      @(negedge clk); we = 0;
    end
    for (int k = 0; k < 40; k++) begin
      int r;
      r = $urandom % ROWS;
      open_row(r);
      for (int b = 0; b < 32; b++) begin
        @(negedge clk); beat_addr = 5'(b); #1;
        checks++;
        if (rdata != model[r][b]) begin failures++; $display("row %0d beat %0d: %h vs %h", r, b, rdata, model[r][b]); end
        if (($urandom % 4) == 0) begin
          we = 1; wdata = 16'($urandom); model[r][b] = wdata;
          @(negedge clk); we = 0; #1;
          checks++;
          if (rdata != model[r][b]) begin failures++; $display("write-through failed"); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
