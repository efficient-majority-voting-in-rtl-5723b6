// class_counter: front end of the majority decision.
//
// Each of the NUM_VOTES input class numbers is decoded to a one-hot vector of
// NUM_CLASSES bits; bit j of all one-hot vectors goes to adder tree j, so the
// NUM_CLASSES parallel adder trees deliver how often each class was voted
// for. The decoders are combinational (the source adds no register between
// decoders and trees); each tree stage is registered, so counts and
// count_valid appear ceil(log2 NUM_VOTES) cycles after in_valid. A vote whose
// value is NUM_CLASSES or more decodes to all zeros and is not counted (a
// choice of this design; the source only has values 0..K-1).
module class_counter #(
  parameter int unsigned NUM_VOTES   = rf_pkg::NUM_TREES,
  parameter int unsigned NUM_CLASSES = rf_pkg::NUM_CLASSES,
  localparam int unsigned Y_W     = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1,
  localparam int unsigned LAT     = (NUM_VOTES > 1) ? $clog2(NUM_VOTES) : 1,
  localparam int unsigned COUNT_W = LAT + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [Y_W-1:0]       votes [NUM_VOTES],
  output logic                 count_valid,
  output logic [COUNT_W-1:0]   counts [NUM_CLASSES]
);

  // onehot[j][i] = (votes[i] == j): already transposed for the trees
  logic [NUM_VOTES-1:0] onehot [NUM_CLASSES];

  always_comb begin
    for (int j = 0; j < NUM_CLASSES; j++)
      for (int i = 0; i < NUM_VOTES; i++)
        onehot[j][i] = (32'(votes[i]) == j);
  end

  for (genvar j = 0; j < NUM_CLASSES; j++) begin : g_tree
    adder_tree #(.N(NUM_VOTES)) u_tree (.clk, .bits(onehot[j]), .count(counts[j]));
  end

  logic [LAT-1:0] valid_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_sr <= '0;
    else        valid_sr <= LAT'({valid_sr, in_valid});
  end
  assign count_valid = valid_sr[LAT-1];

endmodule
