// heapsort_ctrl - state machine that sorts the on-chip memory through the heap.
//
// After start it works in two phases. Insert phase: elements 0 .. size-1 are
// read from the on-chip memory and inserted into the heap one after another.
// Remove phase: the heap's largest element is removed size times and written
// to addresses size-1 down to 0, so the list ends up in ascending order in
// the same words it came from. Both phases come from the method followed
// here; the address order (largest at the top) is this design's choice.
//
// The next element is read while the heap is still busy with the previous
// insert, and in the remove phase the write into memory happens in the same
// cycle as the remove command, so the state machine adds no cycles to the
// heap's own; starting takes one cycle and done is a one-cycle pulse after
// the last element is written. busy is high from the cycle after start to
// done. start is ignored while busy; size must be at most the heap capacity.
// The data paths are plain wires: the heap's insert data is the memory's read
// data and the memory's write data is the heap's maximum; the state machine
// only sequences addresses and commands.
module heapsort_ctrl
  import heapsort_pkg::*;
#(
  parameter int unsigned WIDTH    = DEFAULT_WIDTH,
  parameter int unsigned CAPACITY = DEFAULT_CAPACITY
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  input  logic [$clog2(CAPACITY+1)-1:0]    size,    // elements to sort
  output logic                             busy,
  output logic                             done,
  // on-chip memory port
  output logic                             mem_en,
  output logic                             mem_we,
  output logic [$clog2(CAPACITY)-1:0]      mem_addr,
  output logic [WIDTH-1:0]                 mem_wdata,
  input  logic [WIDTH-1:0]                 mem_rdata,
  // heap command port
  output logic                             hp_valid,
  input  logic                             hp_ready,
  output heap_op_e                         hp_op,
  output logic [WIDTH-1:0]                 hp_data,
  input  logic [WIDTH-1:0]                 hp_max
);

  localparam int unsigned CW = $clog2(CAPACITY + 1);
  localparam int unsigned AW = $clog2(CAPACITY);

  typedef enum logic [1:0] {
    S_IDLE,     // waiting for start
    S_INSERT,   // element idx is on mem_rdata; insert it
    S_REMOVE,   // remove the maximum into address idx
    S_DONE      // pulse done
  } state_e;

  state_e        state;
  logic [CW-1:0] n;     // list length of this sort
  logic [CW-1:0] idx;   // element being inserted, or address being written

  logic hp_fire;
  assign hp_fire = hp_valid && hp_ready;

  always_comb begin
    mem_en    = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = '0;
    mem_wdata = hp_max;
    hp_valid  = 1'b0;
    hp_op     = HEAP_INSERT;
    hp_data   = mem_rdata;
    unique case (state)
      S_IDLE: begin
        // Read element 0 as the sort starts.
        mem_en   = start && size != '0;
        mem_addr = '0;
      end
      S_INSERT: begin
        hp_valid = 1'b1;
        // Prefetch the next element once this one is taken.
        mem_en   = hp_ready && (idx + 1'b1) < n;
        mem_addr = AW'(idx + 1'b1);
      end
      S_REMOVE: begin
        hp_valid = 1'b1;
        hp_op    = HEAP_REMOVE;
        mem_en   = hp_ready;
        mem_we   = 1'b1;
        mem_addr = AW'(idx);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      n     <= '0;
      idx   <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (start) begin
            n     <= size;
            idx   <= '0;
            state <= (size == '0) ? S_DONE : S_INSERT;
          end
        end
        S_INSERT: begin
          if (hp_fire) begin
            if (idx + 1'b1 == n) begin
              idx   <= n - 1'b1;
              state <= S_REMOVE;
            end else begin
              idx <= idx + 1'b1;
            end
          end
        end
        S_REMOVE: begin
          if (hp_fire) begin
            if (idx == '0) state <= S_DONE;
            else           idx   <= idx - 1'b1;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  a_size_fits: assert property (@(posedge clk) disable iff (!rst_n)
    start && state == S_IDLE |-> size <= CW'(CAPACITY))
    else $error("heapsort_ctrl: list longer than the heap capacity");

endmodule
