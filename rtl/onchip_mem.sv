// onchip_mem - on-chip memory holding the list to be sorted.
//
// Before a sort the list is written here; the sorting state machine reads
// every element from it, and afterwards writes the elements back in sorted
// order, so the sort happens in place in this memory. It has two ports of
// equal rights: port A belongs to the sorting state machine, port B to
// whoever loads the list and collects the result. That second port, and the
// memory's organisation as a true dual-port RAM, are this design's choices.
//
// Each port: when en is high the address is used; with we high the word is
// written, otherwise it is read. Read data appears on rdata the cycle after
// the read and stays there until the port's next read. Writing the same word
// from both ports in one cycle is not allowed. Contents are not reset.
module onchip_mem #(
  parameter int unsigned DEPTH = 16384,  // words
  parameter int unsigned WIDTH = 32      // bits per word
) (
  input  logic                     clk,
  // port A
  input  logic                     a_en,
  input  logic                     a_we,
  input  logic [$clog2(DEPTH)-1:0] a_addr,
  input  logic [WIDTH-1:0]         a_wdata,
  output logic [WIDTH-1:0]         a_rdata,
  // port B
  input  logic                     b_en,
  input  logic                     b_we,
  input  logic [$clog2(DEPTH)-1:0] b_addr,
  input  logic [WIDTH-1:0]         b_wdata,
  output logic [WIDTH-1:0]         b_rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      else      a_rdata     <= mem[a_addr];
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      else      b_rdata     <= mem[b_addr];
    end
  end

  a_no_double_write: assert property (@(posedge clk)
    !(a_en && a_we && b_en && b_we && a_addr == b_addr))
    else $error("onchip_mem: both ports write the same word");

endmodule
