// max_tree - tournament reduction that finds the largest of K candidates.
//
// Like a knock-out tournament, candidates are compared in pairs and each
// winner goes on to the next round, so the field halves every clock cycle and
// the overall winner is known after log2(K) cycles instead of the K cycles a
// sequential scan would take. This is how the heap finds the largest child of
// a node.
//
// Each candidate carries a mask bit; masked candidates (children that do not
// exist because the heap's last row is not full) never win. On a tie the
// candidate with the lower index wins. The tree is held as 2K-1 nodes in heap
// order: nodes K-1 .. 2K-2 are the inputs, and every other node is a register
// holding the winner of its two children, so each round is one register
// stage. A new set of candidates may enter every cycle.
//
// The pairwise tournament with log2(K) rounds, one per cycle, follows the
// method this design implements; the masking, the tie rule and running the
// tree as a pipeline are this design's choices.
//
// Timing: out_valid, out_data, out_idx and out_any belong to the in_valid
// given log2(K) cycles earlier. K must be a power of two, at least 2.
module max_tree #(
  parameter int unsigned K     = 2,
  parameter int unsigned WIDTH = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [K-1:0][WIDTH-1:0]       in_data,
  input  logic [K-1:0]                  in_mask,   // 1: candidate takes part
  output logic                          out_valid,
  output logic [WIDTH-1:0]              out_data,
  output logic [$clog2(K)-1:0]          out_idx,   // index of the winner
  output logic                          out_any    // 0: every candidate masked
);

  localparam int unsigned LEVELS = $clog2(K);
  localparam int unsigned NODES  = 2 * K - 1;

  typedef struct packed {
    logic                present;
    logic [LEVELS-1:0]   idx;
    logic [WIDTH-1:0]    data;
  } cand_t;

  cand_t node [NODES];

  // Leaves: the candidates as they come in.
  for (genvar j = 0; j < K; j++) begin : g_leaf
    assign node[K-1+j] = '{present: in_mask[j], idx: LEVELS'(j), data: in_data[j]};
  end

  // Internal nodes: one registered comparison each.
  for (genvar n = 0; n < K - 1; n++) begin : g_match
    cand_t left, right;
    assign left  = node[2*n+1];
    assign right = node[2*n+2];
    always_ff @(posedge clk) begin
      if (left.present && (!right.present || left.data >= right.data))
        node[n] <= left;
      else
        node[n] <= right;
    end
  end

  // Valid bit travels alongside the candidates, one register per round.
  logic [LEVELS:0] vpipe;
  assign vpipe[0] = in_valid;
  for (genvar l = 1; l <= LEVELS; l++) begin : g_valid
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vpipe[l] <= 1'b0;
      else        vpipe[l] <= vpipe[l-1];
    end
  end

  assign out_valid = vpipe[LEVELS];
  assign out_data  = node[0].data;
  assign out_idx   = node[0].idx;
  assign out_any   = node[0].present;

endmodule
