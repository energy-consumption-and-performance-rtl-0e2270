// tb_heapsort_workloads - the list sizes and orders of the evaluation, at the
// default configuration (binary heap, 16384-element capacity).
//
// For every size 4096, 6144, ..., 16384 a random, an ascending and a
// descending list of 32-bit values are sorted, read back and compared with
// the simulator's own sort. For the random lists the cycle count must not
// exceed the FPGA time measured for the original design at 100 MHz:
//   size   4096  6144  8192   10240  12288  14336  16384
//   ms     5.386 8.479 11.665 14.963 18.322 21.737 25.138
// The cycle counts of all 21 runs are printed.
module tb_heapsort_workloads;
  import heapsort_pkg::*;

  localparam int unsigned WIDTH_T = DEFAULT_WIDTH;
  localparam int unsigned CAP_T   = DEFAULT_CAPACITY;
  localparam int          NSIZE   = 7;
  localparam int          SIZES [NSIZE]     = '{4096, 6144, 8192, 10240, 12288, 14336, 16384};
  localparam real         PAPER_MS [NSIZE]  = '{5.386, 8.479, 11.665, 14.963, 18.322, 21.737, 25.138};

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

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    $display("size   order    cycles   ms@100MHz  original design ms");
    for (int s = 0; s < NSIZE; s++) begin
      for (int o = 0; o < 3; o++) begin
        word_t list[$];
        int cycles;
        order_e order;
        order = order_e'(o);
        make_list(SIZES[s], order, list);
        load_list(list);
        run_sort(SIZES[s], cycles);
        check_sorted(list, $sformatf("%0d %s", SIZES[s], order.name()));
        if (order == ORDER_RANDOM) begin
          check(longint'(cycles) <= longint'(PAPER_MS[s] * 1.0e5),
                $sformatf("%0d random: %0d cycles, more than the original design", SIZES[s], cycles));
          $display("%5d  %s %8d  %7.3f    %7.3f", SIZES[s], "random  ", cycles,
                   real'(cycles) / 1.0e5, PAPER_MS[s]);
        end else begin
          string oname;
          oname = (order == ORDER_SORTED) ? "sorted  " : "reverse ";
          $display("%5d  %s %8d  %7.3f", SIZES[s], oname, cycles, real'(cycles) / 1.0e5);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
