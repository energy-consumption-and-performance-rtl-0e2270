// tb_heapsort_ctrl - self-checking test of the sorting state machine.
//
// The state machine is connected to a memory array and a heap model, both
// written in the testbench. The heap model keeps its elements in a list, shows
// the largest on hp_max and, after each command, stays busy for a random
// 0..6 cycles, so the read-ahead of the next element is exercised against
// every timing. Checks: elements are inserted in address order with the
// values the memory holds; exactly size inserts then size removes are issued;
// every removed maximum is written to addresses size-1 down to 0; the
// memory ends sorted; the state machine never leaves the heap idle while a
// command is due (no bubble cycles), and done comes exactly one cycle after
// the last remove.
module tb_heapsort_ctrl;
  import heapsort_pkg::*;

  localparam int unsigned WIDTH = 16;
  localparam int unsigned CAP   = 300;
  localparam int unsigned AW    = $clog2(CAP);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                       start = 1'b0;
  logic [$clog2(CAP+1)-1:0]   size = '0;
  logic                       busy, done;
  logic                       mem_en, mem_we;
  logic [AW-1:0]              mem_addr;
  logic [WIDTH-1:0]           mem_wdata;
  logic [WIDTH-1:0]           mem_rdata = '0;
  logic                       hp_valid;
  logic                       hp_ready;
  heap_op_e                   hp_op;
  logic [WIDTH-1:0]           hp_data;
  logic [WIDTH-1:0]           hp_max;

  heapsort_ctrl #(.WIDTH(WIDTH), .CAPACITY(CAP)) dut (.*);

  int checks = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---- memory model: one port, read data holds until the next read -------
  logic [WIDTH-1:0] mem [CAP];
  always @(posedge clk) if (mem_en) begin
    if (mem_we) mem[mem_addr] <= mem_wdata;
    else        mem_rdata     <= mem[mem_addr];
  end

  // ---- heap model ---------------------------------------------------------
  logic [WIDTH-1:0] heapq[$];
  int busy_left = 0;
  assign hp_ready = (busy_left == 0);
  function automatic logic [WIDTH-1:0] model_max();
    logic [WIDTH-1:0] m = '0;
    foreach (heapq[i]) if (heapq[i] > m) m = heapq[i];
    return m;
  endfunction
  initial hp_max = '0;

  int n_ins = 0, n_rem = 0, n_bubble = 0, last_rem_cycle = 0, cyc = 0;
  int ins_expect_addr = 0, rem_expect_addr = 0;
  logic [WIDTH-1:0] orig [CAP];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (busy_left > 0) busy_left <= busy_left - 1;
    if (rst_n && busy && !done && hp_ready && !hp_valid) n_bubble++;
    if (hp_valid && hp_ready) begin
      busy_left <= $urandom_range(0, 6);
      if (hp_op == HEAP_INSERT) begin
        check(n_rem == 0, "insert after the first remove");
        check(hp_data == orig[ins_expect_addr],
              $sformatf("insert %0d got %0h, expected %0h", ins_expect_addr, hp_data, orig[ins_expect_addr]));
        heapq.push_back(hp_data);
        ins_expect_addr++;
        n_ins++;
      end else begin
        int idx;
        idx = 0;
        check(heapq.size() > 0, "remove from an empty heap");
        check(mem_en && mem_we && int'(mem_addr) == rem_expect_addr && mem_wdata == hp_max,
              $sformatf("remove %0d not written to address %0d", n_rem, rem_expect_addr));
        while (idx < heapq.size() && heapq[idx] != hp_max) idx++;
        if (idx < heapq.size()) heapq.delete(idx);
        rem_expect_addr--;
        n_rem++;
        last_rem_cycle = cyc;
      end
      hp_max <= model_max();
    end
    if (done && n_rem > 0) check(cyc == last_rem_cycle + 1, "done not one cycle after the last remove");
  end

  task automatic sort_test(input int n);
    logic [WIDTH-1:0] expected[$];
    for (int i = 0; i < n; i++) begin
      orig[i] = WIDTH'($urandom_range(0, (i % 3 == 0) ? 3 : 65535));
      mem[i]  = orig[i];
      expected.push_back(orig[i]);
    end
    expected.sort();
    n_ins = 0; n_rem = 0; ins_expect_addr = 0; rem_expect_addr = n - 1;
    @(negedge clk);
    start = 1'b1;
    size  = ($bits(size))'(n);
    @(negedge clk);
    start = 1'b0;
    check(busy, "busy not high after start");
    while (!done) @(negedge clk);
    @(negedge clk);
    check(!busy, "busy still high after done");
    check(n_ins == n && n_rem == n, $sformatf("size %0d: %0d inserts, %0d removes", n, n_ins, n_rem));
    for (int i = 0; i < n; i++)
      check(mem[i] == expected[i], $sformatf("size %0d: word %0d is %0h, expected %0h", n, i, mem[i], expected[i]));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    sort_test(0);
    sort_test(1);
    sort_test(5);
    sort_test(100);
    sort_test(CAP);
    check(n_bubble == 0, $sformatf("%0d cycles with the heap ready and no command", n_bubble));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
