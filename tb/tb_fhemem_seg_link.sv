// tb_fhemem_seg_link: checks the segmented data line. For random switch settings
// and one random driver per segment (sometimes none), every node must see its
// segment's driver (zero if none), and conflict must be set exactly when a
// segment has two drivers. Reference: segments computed directly from sw.
module tb_fhemem_seg_link;
  localparam int N = 16;
  logic [N-1:0]  drv_en;
  logic [15:0]   drv_data [N];
  logic [N-2:0]  sw;
  logic [15:0]   rx_data [N];
  logic          conflict;
  int checks = 0, failures = 0;

  fhemem_seg_link #(.NODES(N), .W(16)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int seg [N];
      int nseg;
      logic [15:0] val [N];
      int ndrv [N];
      logic two;
      sw = N'($urandom);
      nseg = 0;
      for (int i = 0; i < N; i++) begin
        seg[i] = nseg;
        if (i < N - 1 && !sw[i]) nseg++;
      end
      for (int i = 0; i < N; i++) begin drv_data[i] = 16'($urandom); drv_en[i] = 0; end
      for (int s = 0; s < N; s++) begin val[s] = '0; ndrv[s] = 0; end
      // choose drivers
      for (int i = 0; i < N; i++) begin
        if (($urandom % 4) == 0 && (ndrv[seg[i]] == 0 || (t % 10) == 0)) begin
          drv_en[i] = 1;
          ndrv[seg[i]]++;
          val[seg[i]] |= drv_data[i];
        end
      end
      two = 0;
      for (int s = 0; s < N; s++) if (ndrv[s] > 1) two = 1;
      #1;
      checks++;
      if (conflict != two) begin failures++; $display("conflict=%0b expected %0b", conflict, two); end
      if (!two)
        for (int i = 0; i < N; i++) begin
          checks++;
          if (rx_data[i] != val[seg[i]]) begin
            failures++; $display("t=%0d node %0d got %h expected %h", t, i, rx_data[i], val[seg[i]]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
