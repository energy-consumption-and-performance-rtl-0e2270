// heapsort_pkg - types and default sizes shared by the hardware Heapsort.
//
// The defaults describe the main configuration: a binary heap (tree order
// K = 2) large enough for the longest list that was sorted, 16384 elements.
// The element width of 32 bits is this design's own choice; the sort works
// on unsigned values of any width.
package heapsort_pkg;

  // Tree order of the heap (children per node); must be a power of two >= 2.
  localparam int unsigned DEFAULT_K        = 2;
  // Width of one list element, unsigned.
  localparam int unsigned DEFAULT_WIDTH    = 32;
  // Largest list the heap and the on-chip memory hold.
  localparam int unsigned DEFAULT_CAPACITY = 16384;

  // Command given to the heap module.
  typedef enum logic {
    HEAP_INSERT = 1'b0,  // add cmd_data to the heap
    HEAP_REMOVE = 1'b1   // drop the largest element (read it on max_data first)
  } heap_op_e;

endpackage
