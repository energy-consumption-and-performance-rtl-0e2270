// heap - K-ary max-heap with insert and remove-max commands.
//
// The heap keeps its elements in its own memory, laid out so that all
// children of a node can be read in one cycle. Nodes are numbered in the
// usual heap order: node 0 is the root and the children of node p are
// K*p+1 .. K*p+K. The root lives in a register, so the largest element is
// always visible on max_data. Every other node n sits in bank (n-1) mod K at
// row (n-1) div K; that row number is the node's parent, so row p of the K
// banks holds exactly the K siblings below node p.
//
// Insert (sift up): the new element starts in a hole at the first free node.
// While its parent is smaller, the parent moves down into the hole and the
// hole moves up. Two cycles per level: read the parent, then compare and move.
//
// Remove (sift down): the last element is taken out and starts in a hole at
// the root. Per level, the row of children is read in one cycle, the
// max_tree finds the largest child in log2(K) cycles, and if that child is
// larger than the element it moves up into the hole and the hole moves down.
// 2 + log2(K) cycles per level. Children beyond the heap's element count are
// masked out of the tournament.
//
// Both directions give the same heap as swapping the element with its parent
// or largest child at every step, which is how the heap order is maintained
// in the method followed here; holding the moving element in a register
// instead of writing it at every step only saves memory writes. The register
// root, the hole technique and the cycle counts are this design's choices.
//
// Interface: a command is taken when cmd_valid and cmd_ready are both high;
// cmd_ready is high only while no command is in progress. A remove drops the
// element shown on max_data in the cycle it is accepted. Inserting into a
// full heap or removing from an empty one is not allowed and is ignored.
// Reset empties the heap.
module heap
  import heapsort_pkg::*;
#(
  parameter int unsigned K        = DEFAULT_K,        // tree order, power of 2, >= 2
  parameter int unsigned WIDTH    = DEFAULT_WIDTH,    // bits per element
  parameter int unsigned CAPACITY = DEFAULT_CAPACITY  // most elements held
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            cmd_valid,
  output logic                            cmd_ready,
  input  heap_op_e                        cmd_op,
  input  logic [WIDTH-1:0]                cmd_data,
  output logic [WIDTH-1:0]                max_data,   // root, valid when !empty
  output logic [$clog2(CAPACITY+1)-1:0]   count,
  output logic                            empty,
  output logic                            full
);

  localparam int unsigned LOGK  = $clog2(K);
  localparam int unsigned DEPTH = (CAPACITY - 1 + K - 1) / K;   // rows per bank
  localparam int unsigned RW    = $clog2(DEPTH);                // row address bits
  localparam int unsigned CW    = $clog2(CAPACITY + 1);         // count bits
  // Node numbers, wide enough for K*p+K with p < CAPACITY.
  localparam int unsigned NW    = CW + LOGK + 1;

  typedef logic [NW-1:0] node_t;

  typedef enum logic [2:0] {
    S_IDLE,       // waiting for a command
    S_UP_READ,    // sift up: read the parent of the hole
    S_UP_CMP,     // sift up: compare with the parent, move it down or finish
    S_REM_LAST,   // remove: last element being read
    S_DOWN_READ,  // sift down: read the children row of the hole
    S_DOWN_TREE,  // sift down: children enter the max_tree
    S_DOWN_WAIT   // sift down: wait for the winner, move it up or finish
  } state_e;

  state_e           state;
  logic [WIDTH-1:0] root;
  logic [CW-1:0]    cnt;
  node_t            hole;   // node the moving element would occupy
  logic [WIDTH-1:0] val;    // the moving element

  // ---- bank storage -------------------------------------------------------
  logic [RW-1:0]             rd_row;
  logic [K-1:0][WIDTH-1:0]   rd_data;
  logic [K-1:0]              bank_we;
  logic [RW-1:0]             wr_row;
  logic [WIDTH-1:0]          wr_data;

  for (genvar j = 0; j < K; j++) begin : g_bank
    heap_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_bank (
      .clk    (clk),
      .rd_addr(rd_row),
      .rd_data(rd_data[j]),
      .wr_en  (bank_we[j]),
      .wr_addr(wr_row),
      .wr_data(wr_data)
    );
  end

  // ---- largest child ------------------------------------------------------
  logic              tree_in_valid;
  logic [K-1:0]      child_mask;
  logic              tree_valid;
  logic [WIDTH-1:0]  tree_data;
  logic [LOGK-1:0]   tree_idx;
  logic              tree_any;

  max_tree #(.K(K), .WIDTH(WIDTH)) u_tree (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (tree_in_valid),
    .in_data  (rd_data),
    .in_mask  (child_mask),
    .out_valid(tree_valid),
    .out_data (tree_data),
    .out_idx  (tree_idx),
    .out_any  (tree_any)
  );

  // ---- node arithmetic ----------------------------------------------------
  node_t parent, first_child, winner, last;
  assign parent      = (hole - node_t'(1)) >> LOGK;
  assign first_child = (hole << LOGK) + node_t'(1);
  assign winner      = first_child + node_t'(tree_idx);
  assign last        = node_t'(cnt) - node_t'(1);

  for (genvar j = 0; j < K; j++) begin : g_mask
    assign child_mask[j] = (first_child + node_t'(j)) < node_t'(cnt);
  end

  // Parent value during S_UP_CMP: the root register or one bank output.
  logic [WIDTH-1:0] parent_val;
  always_comb begin
    parent_val = root;
    if (parent != '0) parent_val = rd_data[LOGK'(parent - node_t'(1))];
  end

  // ---- where to write this cycle -----------------------------------------
  logic             put;       // place put_val at node put_node
  node_t            put_node;
  logic [WIDTH-1:0] put_val;
  heap_op_e         op;

  assign op        = cmd_op;
  assign cmd_ready = (state == S_IDLE);

  always_comb begin
    put           = 1'b0;
    put_node      = hole;
    put_val       = val;
    rd_row        = '0;
    tree_in_valid = 1'b0;
    unique case (state)
      S_IDLE: begin
        if (cmd_valid && op == HEAP_INSERT && cnt == '0) begin
          put      = 1'b1;
          put_node = '0;
          put_val  = cmd_data;
        end
        // Start reading the last element of a remove.
        rd_row = RW'((last - node_t'(1)) >> LOGK);
      end
      S_UP_READ: begin
        if (hole == '0) put = 1'b1;   // reached the root
        rd_row = RW'((parent - node_t'(1)) >> LOGK);
      end
      S_UP_CMP: begin
        put = 1'b1;
        if (parent_val < val) put_val = parent_val;   // parent moves down
      end
      S_REM_LAST: ;
      S_DOWN_READ: begin
        if (first_child >= node_t'(cnt)) put = 1'b1;  // leaf: element stays
        rd_row = RW'(hole);
      end
      S_DOWN_TREE: tree_in_valid = 1'b1;
      S_DOWN_WAIT: begin
        if (tree_valid) begin
          put = 1'b1;
          if (tree_any && tree_data > val) put_val = tree_data;  // child moves up
        end
      end
      default: ;
    endcase
  end

  always_comb begin
    bank_we = '0;
    wr_row  = RW'((put_node - node_t'(1)) >> LOGK);
    wr_data = put_val;
    if (put && put_node != '0)
      bank_we[LOGK'(put_node - node_t'(1))] = 1'b1;
  end

  // ---- control ------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      root  <= '0;
      cnt   <= '0;
      hole  <= '0;
      val   <= '0;
    end else begin
      if (put && put_node == '0) root <= put_val;
      unique case (state)
        S_IDLE: begin
          if (cmd_valid) begin
            if (op == HEAP_INSERT && cnt != CW'(CAPACITY)) begin
              cnt <= cnt + 1'b1;
              if (cnt != '0) begin
                hole  <= node_t'(cnt);
                val   <= cmd_data;
                state <= S_UP_READ;
              end
            end else if (op == HEAP_REMOVE && cnt != '0) begin
              cnt <= cnt - 1'b1;
              if (cnt != CW'(1)) state <= S_REM_LAST;
            end
          end
        end
        S_UP_READ: state <= (hole == '0) ? S_IDLE : S_UP_CMP;
        S_UP_CMP: begin
          if (parent_val < val) begin
            hole  <= parent;
            state <= S_UP_READ;
          end else begin
            state <= S_IDLE;
          end
        end
        S_REM_LAST: begin
          // The old last node is cnt (cnt is already one smaller).
          val   <= rd_data[LOGK'(node_t'(cnt) - node_t'(1))];
          hole  <= '0;
          state <= S_DOWN_READ;
        end
        S_DOWN_READ: state <= (first_child >= node_t'(cnt)) ? S_IDLE : S_DOWN_TREE;
        S_DOWN_TREE: state <= S_DOWN_WAIT;
        S_DOWN_WAIT: begin
          if (tree_valid) begin
            if (tree_any && tree_data > val) begin
              hole  <= winner;
              state <= S_DOWN_READ;
            end else begin
              state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign max_data = root;
  assign count    = cnt;
  assign empty    = (cnt == '0);
  assign full     = (cnt == CW'(CAPACITY));

  // ---- rules of the command handshake ------------------------------------
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd_op) && $stable(cmd_data))
    else $error("heap: command changed while waiting for cmd_ready");
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && cmd_ready && cmd_op == HEAP_INSERT |-> !full)
    else $error("heap: insert into a full heap");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && cmd_ready && cmd_op == HEAP_REMOVE |-> !empty)
    else $error("heap: remove from an empty heap");

endmodule
