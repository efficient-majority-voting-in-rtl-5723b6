// tree_processor: inference of one axis-parallel binary decision tree.
//
// Nodes are numbered breadth-first starting at 1 for the root, so the children
// of node n are 2n and 2n+1 and the node number is directly the address of the
// node's entry in the two tree tables: the split coordinate memory (which
// coordinate of x the node tests) and the split value memory (the threshold,
// or for a leaf the class it votes for). A third memory holds the input
// vector x itself.
//
// One level costs three clock cycles:
//   1. the tree memories are read at the node address,
//   2. the x memory is read at the split coordinate just fetched,
//   3. A = x[coord] is compared with B = split value; the node address is
//      shifted left by one and its LSB is set when A <= B is false
//      (A <= B goes to child 2n, A > B to child 2n+1).
// After TREE_LEVELS levels the node address points into the leaf level; one
// more cycle reads the split value memory there and its low bits are the
// vote y. A tree of l levels thus takes 3l+1 cycles from start to y_valid,
// and a new start is accepted in the cycle y_valid is high, so one input
// vector per 3l+1 cycles is processed.
//
// From the source: the three memories, the node numbering, the shift-and-set
// address update, the A<=B comparator with a multiplexer choosing 0 or 1, the
// 3-cycle level and the 3l+1 total. This design's own choices: every tree is
// stored at full depth (a leaf that ends higher up must be copied down to the
// leaf level), the write ports used to fill the memories, the level counter
// that tells when the leaf level is reached, and the start/ready/y_valid
// handshake.
//
// Interface: x_we/x_waddr/x_wdata fill x; t_we/t_waddr/t_wcoord/t_wvalue fill
// one node of both tree memories per cycle. start is taken when ready is high.
// y is valid only in the cycle y_valid is high.
module tree_processor #(
  parameter int unsigned TREE_LEVELS = rf_pkg::TREE_LEVELS,
  parameter int unsigned NUM_COORDS  = rf_pkg::NUM_COORDS,
  parameter int unsigned NUM_CLASSES = rf_pkg::NUM_CLASSES,
  parameter int unsigned X_WIDTH     = rf_pkg::X_WIDTH,
  localparam int unsigned NODE_W  = TREE_LEVELS + 1,
  localparam int unsigned COORD_W = (NUM_COORDS > 1) ? $clog2(NUM_COORDS) : 1,
  localparam int unsigned Y_W     = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // x memory fill
  input  logic               x_we,
  input  logic [COORD_W-1:0] x_waddr,
  input  logic [X_WIDTH-1:0] x_wdata,
  // tree memories fill (one node: split coordinate and split value)
  input  logic               t_we,
  input  logic [NODE_W-1:0]  t_waddr,
  input  logic [COORD_W-1:0] t_wcoord,
  input  logic [X_WIDTH-1:0] t_wvalue,
  // control
  input  logic               start,
  output logic               ready,
  output logic [Y_W-1:0]     y,
  output logic               y_valid
);

  typedef enum logic [2:0] {S_IDLE, S_READ_TREE, S_READ_X, S_COMPARE, S_READ_LEAF} state_t;

  state_t                             state;
  logic [NODE_W-1:0]                  node_addr;
  logic [$clog2(TREE_LEVELS+1)-1:0]   level;
  logic [COORD_W-1:0]                 coord_q;
  logic [X_WIDTH-1:0]                 value_q;
  logic [X_WIDTH-1:0]                 x_q;
  logic                               a_le_b;

  // Tree memories, addressed by the node number.
  sync_ram #(.DEPTH(2 ** NODE_W), .WIDTH(COORD_W)) u_split_coord (
    .clk, .we(t_we), .waddr(t_waddr), .wdata(t_wcoord), .raddr(node_addr), .rdata(coord_q)
  );
  sync_ram #(.DEPTH(2 ** NODE_W), .WIDTH(X_WIDTH)) u_split_value (
    .clk, .we(t_we), .waddr(t_waddr), .wdata(t_wvalue), .raddr(node_addr), .rdata(value_q)
  );
  // x memory, addressed by the split coordinate.
  sync_ram #(.DEPTH(NUM_COORDS), .WIDTH(X_WIDTH)) u_x (
    .clk, .we(x_we), .waddr(x_waddr), .wdata(x_wdata), .raddr(coord_q), .rdata(x_q)
  );

  assign a_le_b  = (x_q <= value_q);
  assign ready   = (state == S_IDLE);
  assign y       = value_q[Y_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      node_addr <= NODE_W'(1);
      level     <= '0;
      y_valid   <= 1'b0;
    end else begin
      y_valid <= 1'b0;
      unique case (state)
        // The tree memories read node 1 on the edge that takes start.
        S_IDLE:      if (start) begin
                       state <= S_READ_X;
                       level <= '0;
                     end
        S_READ_TREE: state <= S_READ_X;
        S_READ_X:    state <= S_COMPARE;
        S_COMPARE: begin
          // Multiplexer of the source figure: A<=B selects 0, otherwise 1;
          // after the left shift the addition only sets the LSB.
          node_addr <= {node_addr[NODE_W-2:0], ~a_le_b};
          level     <= level + 1'b1;
          state     <= (level == ($bits(level))'(TREE_LEVELS - 1)) ? S_READ_LEAF : S_READ_TREE;
        end
        S_READ_LEAF: begin
          y_valid   <= 1'b1;
          node_addr <= NODE_W'(1);
          state     <= S_IDLE;
        end
        default:     state <= S_IDLE;
      endcase
    end
  end

endmodule
