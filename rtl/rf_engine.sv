// rf_engine: random forest classifier built from NUM_TREES tree processors
// that run in parallel and one majority decision block.
//
// Every tree processor holds its own copy of the input vector x and its own
// tree, so all trees walk their trees at the same time and deliver their
// votes in the same cycle, 3*TREE_LEVELS+1 cycles after start. The votes go
// to the majority decision, whose result is the class of the forest. With
// the iterative majority decision the worst case from start to class_valid
// is 3l + ceil(log2 T) + floor(log2 T) + 3 cycles (56 for 40 trees of 14
// levels); since the trees take longer than a decision, a new input vector
// can start every 3l+1 cycles (43) while the previous vote is still being
// decided. MAJORITY_PIPELINED selects the pipelined majority decision
// instead, which has a fixed latency and could take votes every cycle.
//
// From the source: the structure (parallel tree processors plus one majority
// block), the default sizes and the cycle counts. This design's choices: the
// ports used to fill the memories (x is written to all trees at once, tree
// tables one node of one tree per cycle), the start/ready handshake, and
// that the tree votes are also brought out for observation. Filling the
// memories is outside the cycle counts above, as it is in the source.
module rf_engine #(
  parameter int unsigned NUM_TREES          = rf_pkg::NUM_TREES,
  parameter int unsigned TREE_LEVELS        = rf_pkg::TREE_LEVELS,
  parameter int unsigned NUM_CLASSES        = rf_pkg::NUM_CLASSES,
  parameter int unsigned NUM_COORDS         = rf_pkg::NUM_COORDS,
  parameter int unsigned X_WIDTH            = rf_pkg::X_WIDTH,
  parameter bit          MAJORITY_PIPELINED = 1'b0,
  localparam int unsigned NODE_W  = TREE_LEVELS + 1,
  localparam int unsigned COORD_W = (NUM_COORDS > 1) ? $clog2(NUM_COORDS) : 1,
  localparam int unsigned Y_W     = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1,
  localparam int unsigned TREE_W  = (NUM_TREES > 1) ? $clog2(NUM_TREES) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // input vector, written into the x memory of every tree
  input  logic               x_we,
  input  logic [COORD_W-1:0] x_waddr,
  input  logic [X_WIDTH-1:0] x_wdata,
  // tree tables: node t_waddr of tree t_tree
  input  logic               t_we,
  input  logic [TREE_W-1:0]  t_tree,
  input  logic [NODE_W-1:0]  t_waddr,
  input  logic [COORD_W-1:0] t_wcoord,
  input  logic [X_WIDTH-1:0] t_wvalue,
  // classification
  input  logic               start,
  output logic               ready,
  output logic               votes_valid,
  output logic [Y_W-1:0]     votes [NUM_TREES],
  output logic               class_valid,
  output logic [Y_W-1:0]     class_out
);

  logic [NUM_TREES-1:0] tree_ready;
  logic [NUM_TREES-1:0] tree_valid;

  for (genvar t = 0; t < NUM_TREES; t++) begin : g_tree
    tree_processor #(
      .TREE_LEVELS(TREE_LEVELS), .NUM_COORDS(NUM_COORDS),
      .NUM_CLASSES(NUM_CLASSES), .X_WIDTH(X_WIDTH)
    ) u_tree (
      .clk, .rst_n,
      .x_we, .x_waddr, .x_wdata,
      .t_we(t_we && (t_tree == TREE_W'(t))), .t_waddr, .t_wcoord, .t_wvalue,
      .start(start && ready),
      .ready(tree_ready[t]),
      .y(votes[t]),
      .y_valid(tree_valid[t])
    );
  end

  // All trees run in lock step; they are started together and finish together.
  assign ready       = &tree_ready;
  assign votes_valid = &tree_valid;

  if (MAJORITY_PIPELINED) begin : g_pipe
    majority_pipelined #(.NUM_VOTES(NUM_TREES), .NUM_CLASSES(NUM_CLASSES)) u_major (
      .clk, .rst_n, .in_valid(votes_valid), .votes, .out_valid(class_valid), .out_class(class_out)
    );
  end else begin : g_iter
    majority_iterative #(.NUM_VOTES(NUM_TREES), .NUM_CLASSES(NUM_CLASSES)) u_major (
      .clk, .rst_n, .in_valid(votes_valid), .votes, .out_valid(class_valid), .out_class(class_out)
    );
  end

endmodule
