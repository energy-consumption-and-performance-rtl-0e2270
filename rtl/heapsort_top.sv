// heapsort_top - hardware Heapsort: on-chip memory, state machine and heap.
//
// A list of unsigned numbers is written into the on-chip memory through the
// host port. A start pulse with the list length makes the state machine
// insert every element into the K-ary max-heap and then take the largest out
// size times, writing it back from the top address down, so that the memory
// afterwards holds the list in ascending order. done pulses when the last
// element has been written; the result is read through the host port.
//
// The main configuration is a binary heap (K = 2) for up to 16384 elements of
// 32 bits; K may be set to any power of two, which widens the heap's memory
// to K banks and its largest-child search to a log2(K)-round tournament.
//
// The split into on-chip memory, state machine and heap module, the in-place
// sort and the banked K-ary heap follow the method implemented here; the host
// port, the ascending result order, the element width and the reset are this
// design's choices.
//
// Timing: a sort of n elements takes the sum of the heap's insert and remove
// times plus two cycles (see heap). The host port may be used at any time;
// writing the list while busy is high is not allowed.
module heapsort_top
  import heapsort_pkg::*;
#(
  parameter int unsigned K        = DEFAULT_K,
  parameter int unsigned WIDTH    = DEFAULT_WIDTH,
  parameter int unsigned CAPACITY = DEFAULT_CAPACITY
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic [$clog2(CAPACITY+1)-1:0]  size,
  output logic                           busy,
  output logic                           done,
  // host access to the on-chip memory
  input  logic                           host_en,
  input  logic                           host_we,
  input  logic [$clog2(CAPACITY)-1:0]    host_addr,
  input  logic [WIDTH-1:0]               host_wdata,
  output logic [WIDTH-1:0]               host_rdata
);

  localparam int unsigned AW = $clog2(CAPACITY);

  logic             mem_en, mem_we;
  logic [AW-1:0]    mem_addr;
  logic [WIDTH-1:0] mem_wdata, mem_rdata;

  logic             hp_valid, hp_ready;
  heap_op_e         hp_op;
  logic [WIDTH-1:0] hp_data, hp_max;
  logic [$clog2(CAPACITY+1)-1:0] hp_count;
  logic             hp_empty, hp_full;

  onchip_mem #(.DEPTH(CAPACITY), .WIDTH(WIDTH)) u_mem (
    .clk    (clk),
    .a_en   (mem_en),
    .a_we   (mem_we),
    .a_addr (mem_addr),
    .a_wdata(mem_wdata),
    .a_rdata(mem_rdata),
    .b_en   (host_en),
    .b_we   (host_we),
    .b_addr (host_addr),
    .b_wdata(host_wdata),
    .b_rdata(host_rdata)
  );

  heapsort_ctrl #(.WIDTH(WIDTH), .CAPACITY(CAPACITY)) u_ctrl (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start),
    .size     (size),
    .busy     (busy),
    .done     (done),
    .mem_en   (mem_en),
    .mem_we   (mem_we),
    .mem_addr (mem_addr),
    .mem_wdata(mem_wdata),
    .mem_rdata(mem_rdata),
    .hp_valid (hp_valid),
    .hp_ready (hp_ready),
    .hp_op    (hp_op),
    .hp_data  (hp_data),
    .hp_max   (hp_max)
  );

  heap #(.K(K), .WIDTH(WIDTH), .CAPACITY(CAPACITY)) u_heap (
    .clk      (clk),
    .rst_n    (rst_n),
    .cmd_valid(hp_valid),
    .cmd_ready(hp_ready),
    .cmd_op   (hp_op),
    .cmd_data (hp_data),
    .max_data (hp_max),
    .count    (hp_count),
    .empty    (hp_empty),
    .full     (hp_full)
  );

  a_no_host_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(host_en && host_we))
    else $error("heapsort_top: host wrote the memory during a sort");

  a_heap_drained: assert property (@(posedge clk) disable iff (!rst_n)
    done |-> hp_empty && hp_count == '0 && !hp_full)
    else $error("heapsort_top: heap not empty at the end of a sort");

endmodule
