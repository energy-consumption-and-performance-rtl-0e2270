// tb_heapsort_top - end-to-end test of the hardware Heapsort at its default
// configuration (binary heap, 16384-element capacity, 32-bit elements).
//
// Lists of several lengths and orders (random, ascending, descending, many
// equal values, one element, no element, and a full 16384-element list) are
// loaded through the host port, sorted, read back and compared with the same
// list sorted by the simulator. The cycle count of each sort is checked
// against the heap's cycle budget, and for the 4096- and 16384-element random
// lists against the FPGA times reported for the original design at 100 MHz
// (5.386 ms and 25.138 ms): this design must not be slower. Sorting the same
// list twice must take the same number of cycles.
//
// The test also counts how often each mechanism of the design acted and fails
// if one never did: an insert that moved up a level, an insert that rose to
// the root, a remove that moved down a level, a tournament with missing
// children (partly filled last row), an element read ahead while the heap was
// busy, and a remove written to memory in the same cycle.
module tb_heapsort_top;
  import heapsort_pkg::*;

  localparam int unsigned WIDTH_T = DEFAULT_WIDTH;
  localparam int unsigned CAP_T   = DEFAULT_CAPACITY;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;   // 100 MHz

  logic                         start = 1'b0;
  logic [$clog2(CAP_T+1)-1:0]   size = '0;
  logic                         busy, done;
  logic                         host_en = 1'b0, host_we = 1'b0;
  logic [$clog2(CAP_T)-1:0]     host_addr = '0;
  logic [WIDTH_T-1:0]           host_wdata = '0;
  logic [WIDTH_T-1:0]           host_rdata;

  int checks = 0;
  int failures = 0;

  heapsort_top dut (
    .clk, .rst_n, .start, .size, .busy, .done,
    .host_en, .host_we, .host_addr, .host_wdata, .host_rdata
  );

  `include "heapsort_tasks.svh"

  // ---- mechanism counters -------------------------------------------------
  int n_up_move = 0, n_up_root = 0, n_down_move = 0, n_masked = 0;
  int n_prefetch = 0, n_remove_write = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_heap.state.name() == "S_UP_CMP" && dut.u_heap.parent_val < dut.u_heap.val)
      n_up_move++;
    if (dut.u_heap.state.name() == "S_UP_READ" && dut.u_heap.hole == '0)
      n_up_root++;
    if (dut.u_heap.state.name() == "S_DOWN_WAIT" && dut.u_heap.tree_valid &&
        dut.u_heap.tree_data > dut.u_heap.val)
      n_down_move++;
    if (dut.u_heap.tree_in_valid && !(&dut.u_heap.child_mask))
      n_masked++;
    if (dut.u_ctrl.state.name() == "S_INSERT" && dut.mem_en && !dut.mem_we)
      n_prefetch++;
    if (dut.hp_valid && dut.hp_ready && dut.hp_op == HEAP_REMOVE && dut.mem_en && dut.mem_we)
      n_remove_write++;
  end

  // Upper bound on the cycles of a sort of n elements with a binary heap:
  // per insert 3 + 2*depth, per remove 3 + 3*depth, plus 2.
  function automatic longint bound_k2(input int n);
    longint b = 2;
    for (int c = 0; c < n; c++) begin
      int d = $clog2(c + 2) - 1;   // depth of node c in a binary heap
      b += 3 + 2 * d + 3 + 3 * d;
    end
    return b;
  endfunction

  task automatic sort_case(input int n, input order_e order, input string tag,
                           input bit few_values = 1'b0, input real paper_ms = 0.0);
    word_t list[$];
    int cycles;
    make_list(n, order, list);
    if (few_values) foreach (list[i]) list[i] = word_t'(list[i] % 5);
    load_list(list);
    run_sort(n, cycles);
    check_sorted(list, tag);
    check(longint'(cycles) <= bound_k2(n),
          $sformatf("%s: %0d cycles, bound %0d", tag, cycles, bound_k2(n)));
    if (paper_ms > 0.0) begin
      longint paper_cycles = longint'(paper_ms * 1.0e5);   // 100 MHz
      check(longint'(cycles) <= paper_cycles,
            $sformatf("%s: %0d cycles, original design %0d", tag, cycles, paper_cycles));
      $display("%s: %0d cycles = %0.3f ms at 100 MHz (original design %0.3f ms)",
               tag, cycles, real'(cycles) / 1.0e5, paper_ms);
    end else begin
      $display("%s: %0d cycles", tag, cycles);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    sort_case(0, ORDER_RANDOM, "empty list");
    sort_case(1, ORDER_RANDOM, "one element");
    sort_case(2, ORDER_REVERSE, "two elements");
    sort_case(37, ORDER_RANDOM, "37 random");
    sort_case(64, ORDER_SORTED, "64 ascending");
    sort_case(64, ORDER_REVERSE, "64 descending");
    sort_case(200, ORDER_RANDOM, "200 values 0..4", 1'b1);
    sort_case(4096, ORDER_RANDOM, "4096 random", 1'b0, 5.386);
    sort_case(CAP_T, ORDER_RANDOM, "16384 random", 1'b0, 25.138);

    // The run time depends only on the data: the same list twice, the second
    // time with the memory holding other values beforehand, takes the same
    // number of cycles.
    begin
      word_t list[$];
      word_t other[$];
      int c1, c2;
      make_list(1000, ORDER_RANDOM, list);
      load_list(list);
      run_sort(1000, c1);
      check_sorted(list, "1000 random, first run");
      make_list(1000, ORDER_REVERSE, other);
      load_list(other);
      run_sort(1000, c2);
      load_list(list);
      run_sort(1000, c2);
      check_sorted(list, "1000 random, second run");
      check(c1 == c2, $sformatf("same list took %0d and %0d cycles", c1, c2));
      $display("same list twice: %0d and %0d cycles", c1, c2);
    end

    $display("mechanisms: insert moved up %0d, insert rose to root %0d, remove moved down %0d,",
             n_up_move, n_up_root, n_down_move);
    $display("            tournament with missing children %0d, read-ahead %0d, remove+write %0d",
             n_masked, n_prefetch, n_remove_write);
    check(n_up_move > 0,      "no insert moved up");
    check(n_up_root > 0,      "no insert rose to the root");
    check(n_down_move > 0,    "no remove moved down");
    check(n_masked > 0,       "no tournament had missing children");
    check(n_prefetch > 0,     "no element was read ahead");
    check(n_remove_write > 0, "no remove was written back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
