// tb_heapsort_kvalues - the sweep over tree order k of the evaluation.
//
// Seven copies of the design, with K = 2, 4, 8, 16, 32, 64 and 128 and the
// default 16384-element capacity, sort the same random lists of every size
// 4096, 6144, ..., 16384. All copies must produce the sorted list, and every
// K above 2 must need fewer cycles than the binary heap, since the wider
// heap is shallower and each level costs only log2(K) cycles more. The cycle
// counts are printed as a table; which K is fastest is reported, not checked
// (with this design's cycle budget it depends on how full the last level is).
module tb_heapsort_kvalues;
  import heapsort_pkg::*;

  localparam int unsigned WIDTH = DEFAULT_WIDTH;
  localparam int unsigned CAP   = DEFAULT_CAPACITY;
  localparam int          NK    = 7;
  localparam int unsigned KS [NK] = '{2, 4, 8, 16, 32, 64, 128};
  localparam int          NSIZE = 7;
  localparam int          SIZES [NSIZE] = '{4096, 6144, 8192, 10240, 12288, 14336, 16384};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                       start = 1'b0;
  logic [$clog2(CAP+1)-1:0]   size = '0;
  logic                       host_en = 1'b0, host_we = 1'b0;
  logic [$clog2(CAP)-1:0]     host_addr = '0;
  logic [WIDTH-1:0]           host_wdata = '0;
  logic [NK-1:0]              busy, done;
  logic [WIDTH-1:0]           host_rdata [NK];

  int checks = 0;
  int failures = 0;
  int cycles [NK];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // All copies share start, size and the host writes; each has its own
  // read data, busy and done.
  for (genvar g = 0; g < NK; g++) begin : g_dut
    heapsort_top #(.K(KS[g])) dut (
      .clk, .rst_n, .start, .size, .busy(busy[g]), .done(done[g]),
      .host_en, .host_we, .host_addr, .host_wdata, .host_rdata(host_rdata[g])
    );

    int cnt = 0;
    logic running = 1'b0;
    always @(posedge clk) begin
      if (start) begin
        running <= 1'b1;
        cnt <= 1;
      end else if (running) begin
        cnt <= cnt + 1;
        if (done[g]) begin
          running <= 1'b0;
          cycles[g] = cnt + 1;
        end
      end
    end
  end

  initial begin
    logic [WIDTH-1:0] list[$];
    logic [WIDTH-1:0] expected[$];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    $display(" size     k=2      k=4      k=8     k=16     k=32     k=64    k=128   fastest");
    for (int s = 0; s < NSIZE; s++) begin
      int n;
      int best;
      n = SIZES[s];
      list.delete();
      for (int i = 0; i < n; i++) list.push_back(WIDTH'($urandom));
      foreach (list[i]) begin
        host_en <= 1'b1; host_we <= 1'b1;
        host_addr <= ($bits(host_addr))'(i); host_wdata <= list[i];
        @(posedge clk);
      end
      host_en <= 1'b0; host_we <= 1'b0;
      start <= 1'b1; size <= ($bits(size))'(n);
      @(posedge clk);
      start <= 1'b0;
      @(posedge clk);
      while (|busy) @(posedge clk);
      @(posedge clk);
      expected = list;
      expected.sort();
      for (int k = 0; k < NK; k++) begin
        int bad;
        bad = 0;
        for (int i = 0; i < n; i++) begin
          host_en <= 1'b1; host_addr <= ($bits(host_addr))'(i);
          @(posedge clk);
          host_en <= 1'b0;
          @(posedge clk);
          if (host_rdata[k] != expected[i]) bad++;
        end
        check(bad == 0, $sformatf("K=%0d size %0d: %0d words out of order", KS[k], n, bad));
        if (k > 0) check(cycles[k] < cycles[0],
                         $sformatf("K=%0d size %0d: %0d cycles, not fewer than K=2 (%0d)",
                                   KS[k], n, cycles[k], cycles[0]));
      end
      best = 0;
      for (int k = 1; k < NK; k++) if (cycles[k] < cycles[best]) best = k;
      $display("%5d %8d %8d %8d %8d %8d %8d %8d   k=%0d", n, cycles[0], cycles[1], cycles[2],
               cycles[3], cycles[4], cycles[5], cycles[6], KS[best]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
