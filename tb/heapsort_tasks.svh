// heapsort_tasks.svh - shared testbench tasks for driving heapsort_top.
//
// Included inside a testbench module that declares clk, start, size, busy,
// done, host_en, host_we, host_addr, host_wdata, host_rdata, the counters
// checks and failures, and the parameters WIDTH_T and CAP_T. The list to sort
// is made by make_list; the expected result is the same list sorted by the
// simulator's own sort() method, which shares nothing with the design.

typedef logic [WIDTH_T-1:0] word_t;

// Kinds of input list: random order, already ascending, descending.
typedef enum int { ORDER_RANDOM, ORDER_SORTED, ORDER_REVERSE } order_e;

task automatic check(input bit ok, input string what);
  checks++;
  if (!ok) begin
    failures++;
    if (failures < 20) $display("FAIL: %s", what);
  end
endtask

function automatic void make_list(input int n, input order_e order, ref word_t list[$]);
  list.delete();
  for (int i = 0; i < n; i++) list.push_back(word_t'($urandom));
  if (order == ORDER_SORTED)  list.sort();
  if (order == ORDER_REVERSE) list.rsort();
endfunction

task automatic load_list(ref word_t list[$]);
  foreach (list[i]) begin
    host_en    <= 1'b1;
    host_we    <= 1'b1;
    host_addr  <= ($bits(host_addr))'(i);
    host_wdata <= list[i];
    @(posedge clk);
  end
  host_en <= 1'b0;
  host_we <= 1'b0;
  @(posedge clk);
endtask

// Start a sort of n elements; return the cycles from the start pulse to done.
task automatic run_sort(input int n, output int cycles);
  start <= 1'b1;
  size  <= ($bits(size))'(n);
  @(posedge clk);
  start <= 1'b0;
  cycles = 1;
  while (!done) begin
    @(posedge clk);
    cycles++;
  end
  @(posedge clk);
  check(!busy, "busy still high after done");
endtask

// Read the memory back and compare it with the list sorted ascending.
task automatic check_sorted(ref word_t list[$], input string tag);
  word_t expected[$];
  int bad = 0;
  expected = list;
  expected.sort();
  foreach (expected[i]) begin
    host_en   <= 1'b1;
    host_we   <= 1'b0;
    host_addr <= ($bits(host_addr))'(i);
    @(posedge clk);
    host_en <= 1'b0;
    @(posedge clk);
    if (host_rdata != expected[i]) begin
      bad++;
      if (bad < 5) $display("  %s: word %0d is %0h, expected %0h", tag, i, host_rdata, expected[i]);
    end
  end
  check(bad == 0, $sformatf("%s: %0d words out of order", tag, bad));
endtask
