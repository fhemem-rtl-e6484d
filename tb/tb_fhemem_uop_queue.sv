// tb_fhemem_uop_queue: checks the micro-operation FIFO against a queue model.
// Random pushes and pops for 2000 cycles; every popped head must equal the model's
// oldest entry, and full/empty must match the model's occupancy (DEPTH = 8).
module tb_fhemem_uop_queue;
  import fhemem_pkg::*;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0, full, empty;
  uop_t push_uop = '0, head;
  int checks = 0, failures = 0;
  uop_t model [$];

  fhemem_uop_queue #(.DEPTH(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      checks++;
      if (full != (model.size() == 8) || empty != (model.size() == 0)) begin
        failures++; $display("flags wrong at %0d: full=%0b empty=%0b n=%0d", t, full, empty, model.size());
      end
      if (!empty) begin
        checks++;
        if (head != model[0]) begin failures++; $display("head mismatch at %0d", t); end
      end
      push = !full && ($urandom % 3) != 0 && t < 1900;
      pop  = ($urandom % 2) != 0;
      push_uop = {$urandom, $urandom, $urandom};
      @(posedge clk);
      if (pop && model.size() != 0) void'(model.pop_front());
      if (push && !(full)) model.push_back(push_uop);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
