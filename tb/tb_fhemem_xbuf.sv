// tb_fhemem_xbuf: checks the two-entry 256-bit transfer buffer. Random push/pop
// traffic (never pushing into a full buffer without a pop, never popping an empty
// one, never pushing while full) is compared with a queue model: head data, empty and full every cycle,
// and the buffer must hold exactly two blocks.
module tb_fhemem_xbuf;
  import fhemem_pkg::*;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0, empty, full;
  block_t push_data = '0, head;
  int checks = 0, failures = 0;
  block_t model [$];

  fhemem_xbuf dut (.*);
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
    // fill to two entries: full must rise after exactly two pushes
    for (int i = 0; i < 2; i++) begin
      @(negedge clk);
      push = 1; push_data = {8{$urandom}};
      @(posedge clk); model.push_back(push_data); #1;
    end
    @(negedge clk); push = 0;
    checks++; if (!full || empty) begin failures++; $display("not full after 2 pushes"); end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      checks++;
      if (full != (model.size() == 2) || empty != (model.size() == 0)) begin
        failures++; $display("flags wrong at %0d", t);
      end
      if (!empty) begin
        checks++;
        if (head != model[0]) begin failures++; $display("head mismatch at %0d", t); end
      end
      pop  = !empty && ($urandom % 2);
      push = !full && ($urandom % 2);
      push_data = {8{$urandom}};
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(push_data);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
