// tb_heap - self-checking test of the K-ary max-heap.
//
// Three heaps of tree order 2, 4 and 8 (capacity 50, so the last row of
// children is only partly filled) are driven with random inserts and removes,
// including filling them completely and emptying them. A plain list held by
// the testbench is the reference: after every command the heap's maximum,
// count, empty and full flags must match it. The time each command takes is
// checked against the bound that follows from the heap's cycle budget:
// insert at most 3 + 2*d cycles and remove at most 3 + d*(2 + log2 K) cycles
// for a heap of depth d, and exactly 1 cycle for an insert into an empty heap.
module tb_heap;
  import heapsort_pkg::*;

  localparam int unsigned WIDTH = 16;
  localparam int unsigned CAP   = 50;
  localparam int          NK    = 3;
  localparam int unsigned KS [NK] = '{2, 4, 8};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int finished = 0;
  int n_full = 0, n_empty = 0, n_up_moves = 0, n_down_moves = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  for (genvar g = 0; g < NK; g++) begin : g_dut
    localparam int unsigned K = KS[g];
    localparam int unsigned L = $clog2(K);

    logic                        cmd_valid;
    logic                        cmd_ready;
    heap_op_e                    cmd_op;
    logic [WIDTH-1:0]            cmd_data;
    logic [WIDTH-1:0]            max_data;
    logic [$clog2(CAP+1)-1:0]    count;
    logic                        empty, full;

    heap #(.K(K), .WIDTH(WIDTH), .CAPACITY(CAP)) dut (
      .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_data,
      .max_data, .count, .empty, .full
    );

    logic [WIDTH-1:0] model [$];

    function automatic int depth_of(int n);
      int d = 0;
      while (n > 0) begin
        n = (n - 1) / K;
        d++;
      end
      return d;
    endfunction

    function automatic logic [WIDTH-1:0] model_max();
      logic [WIDTH-1:0] m = '0;
      for (int i = 0; i < model.size(); i++) if (model[i] > m) m = model[i];
      return m;
    endfunction

    task automatic compare_state();
      check(count == ($bits(count))'(model.size()), $sformatf("K=%0d count %0d, expected %0d", K, count, model.size()));
      check(empty == (model.size() == 0), $sformatf("K=%0d empty flag", K));
      check(full == (model.size() == CAP), $sformatf("K=%0d full flag", K));
      if (model.size() != 0)
        check(max_data == model_max(), $sformatf("K=%0d max %0h, expected %0h", K, max_data, model_max()));
      if (model.size() == CAP) n_full++;
    endtask

    // Issue one command and wait until the heap is ready again.
    task automatic do_cmd(input heap_op_e op, input logic [WIDTH-1:0] data);
      int cycles = 0;
      int bound;
      int n_before = model.size();
      cmd_valid <= 1'b1;
      cmd_op    <= op;
      cmd_data  <= data;
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);   // accepted on this edge
      cmd_valid <= 1'b0;
      do begin
        @(posedge clk);
        cycles++;
      end while (!cmd_ready);
      if (op == HEAP_INSERT) begin
        model.push_back(data);
        bound = (n_before == 0) ? 1 : 3 + 2 * depth_of(n_before);
        if (n_before == 0) check(cycles == 1, $sformatf("K=%0d insert into empty took %0d cycles", K, cycles));
        else if (cycles > 3) n_up_moves++;
      end else begin
        logic [WIDTH-1:0] m = model_max();
        int idx = 0;
        while (model[idx] != m) idx++;
        model.delete(idx);
        bound = 3 + depth_of(model.size()) * (2 + L);
        if (cycles > 3 + 2 + L) n_down_moves++;
        if (model.size() == 0) n_empty++;
      end
      check(cycles <= bound, $sformatf("K=%0d %s took %0d cycles, bound %0d", K, op.name(), cycles, bound));
      compare_state();
    endtask

    initial begin
      cmd_valid = 1'b0;
      cmd_op    = HEAP_INSERT;
      cmd_data  = '0;
      wait (rst_n);
      @(posedge clk);
      compare_state();
      // Fill completely, drain completely, three times with different data.
      for (int round = 0; round < 3; round++) begin
        for (int i = 0; i < CAP; i++) begin
          logic [WIDTH-1:0] v;
          case (round)
            0: v = WIDTH'($urandom);
            1: v = WIDTH'(i);            // ascending: every insert rises to the root
            default: v = WIDTH'($urandom_range(0, 7));   // many equal values
          endcase
          do_cmd(HEAP_INSERT, v);
        end
        for (int i = 0; i < CAP; i++) do_cmd(HEAP_REMOVE, '0);
      end
      // Random mix.
      for (int i = 0; i < 600; i++) begin
        if (model.size() == 0 || (model.size() < CAP && $urandom_range(0, 1) == 1))
          do_cmd(HEAP_INSERT, WIDTH'($urandom));
        else
          do_cmd(HEAP_REMOVE, '0);
      end
      finished++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (finished == NK);
    check(n_full > 0,       "heap never became full");
    check(n_empty > 0,      "heap never became empty");
    check(n_up_moves > 0,   "no insert moved up a level");
    check(n_down_moves > 0, "no remove moved down a level");
    $display("tb_heap: full %0d, empty %0d, inserts that rose %0d, removes that sank %0d",
             n_full, n_empty, n_up_moves, n_down_moves);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
