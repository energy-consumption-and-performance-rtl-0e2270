// heap_bank - one memory bank of the heap's own storage.
//
// The heap spreads sibling nodes over K such banks: bank j holds child j of
// every node, and row r of every bank belongs to the children of node r. So
// one read address, given to all banks at once, returns all K children of a
// node in a single cycle.
//
// The bank is a simple dual-port RAM: one synchronous read port (data appears
// on rd_data the cycle after rd_addr is presented and stays until the next
// clock edge) and one write port. A read of the row being written in the same
// cycle returns the old contents. Contents are not reset. Its organisation as
// one read and one write port is this design's choice.
module heap_bank #(
  parameter int unsigned DEPTH = 8192,  // rows
  parameter int unsigned WIDTH = 32     // bits per element
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
