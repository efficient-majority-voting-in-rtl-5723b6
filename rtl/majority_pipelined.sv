// majority_pipelined: majority decision that accepts a new set of votes in
// every clock cycle (the pipelined architecture).
//
// The subtraction loop of majority_iterative is unrolled into S registered
// stages, S = floor(log2(NUM_VOTES+1)), the largest number of '1' bits a
// count can have. Each stage takes the NUM_CLASSES residual counts of the
// stage before, ORs those that are non-negative, finds the leading one and
// subtracts it from all of them. If that subtraction would make every count
// negative the stage instead passes its input on unchanged and marks it
// final; every later stage then passes it on as well. After the last stage a
// priority encoder (highest class number on a draw) picks a non-negative
// class, and its output is registered.
//
// Timing: in_valid in cycle 0 gives out_valid and out_class in cycle
// ceil(log2 T) + S + 1, i.e. ceil(log2 T) + floor(log2 T) + 1 whenever T+1
// is not a power of two; one result per cycle after that.
//
// From the source: the unrolled stages with one LOD and K subtractions each,
// the pass-on rule for a stage whose counts are all negative, and the latency
// formula. The source states both that the loop is unrolled to ceil(log2 T)
// stages and a latency of ceil(log2 T)+floor(log2 T)+1 cycles; the stage
// count here follows the latency, and is the smallest that is always enough.
// The counts enter the first stage straight from the adder trees, without
// the extra load register of the iterative version, which is what that
// latency implies.
module majority_pipelined #(
  parameter int unsigned NUM_VOTES   = rf_pkg::NUM_TREES,
  parameter int unsigned NUM_CLASSES = rf_pkg::NUM_CLASSES,
  localparam int unsigned Y_W     = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1,
  localparam int unsigned LAT     = (NUM_VOTES > 1) ? $clog2(NUM_VOTES) : 1,
  localparam int unsigned COUNT_W = LAT + 1,
  localparam int unsigned SW      = COUNT_W + 1,
  localparam int unsigned S       = rf_pkg::sub_stages(NUM_VOTES)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [Y_W-1:0] votes [NUM_VOTES],
  output logic           out_valid,
  output logic [Y_W-1:0] out_class
);

  logic               count_valid;
  logic [COUNT_W-1:0] counts [NUM_CLASSES];

  class_counter #(.NUM_VOTES(NUM_VOTES), .NUM_CLASSES(NUM_CLASSES)) u_count (
    .clk, .rst_n, .in_valid, .votes, .count_valid, .counts
  );

  // stage 0: the adder tree outputs with a 0 sign bit appended
  logic [SW-1:0] val0 [NUM_CLASSES];
  always_comb
    for (int j = 0; j < NUM_CLASSES; j++) val0[j] = {1'b0, counts[j]};

  for (genvar s = 1; s <= S; s++) begin : g_stage
    logic [SW-1:0]      in_val [NUM_CLASSES];
    logic               in_fin, in_vld;
    logic [SW-1:0]      val  [NUM_CLASSES];
    logic               fin, vld;
    logic [COUNT_W-1:0] or_bits;
    logic [COUNT_W-1:0] lead;
    logic [SW-1:0]      diff [NUM_CLASSES];
    logic               all_neg;

    if (s == 1) begin : g_first
      assign in_val = val0;
      assign in_fin = 1'b0;
      assign in_vld = count_valid;
    end else begin : g_next
      assign in_val = g_stage[s-1].val;
      assign in_fin = g_stage[s-1].fin;
      assign in_vld = g_stage[s-1].vld;
    end

    always_comb begin
      or_bits = '0;
      for (int j = 0; j < NUM_CLASSES; j++)
        or_bits |= in_val[j][COUNT_W-1:0] & {COUNT_W{~in_val[j][SW-1]}};
    end

    lod #(.WIDTH(COUNT_W)) u_lod (.in(or_bits), .out(lead));

    always_comb begin
      all_neg = 1'b1;
      for (int j = 0; j < NUM_CLASSES; j++) begin
        diff[j] = in_val[j] - {1'b0, lead};
        all_neg &= diff[j][SW-1];
      end
    end

    // A stage whose subtraction would leave no count non-negative passes its
    // input on and marks it final, and so does every stage after it.
    always_ff @(posedge clk) begin
      if (in_fin || all_neg) begin
        val <= in_val;
        fin <= 1'b1;
      end else begin
        val <= diff;
        fin <= 1'b0;
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld <= 1'b0;
      else        vld <= in_vld;
    end
  end

  logic [Y_W-1:0] enc;
  always_comb begin
    enc = '0;
    for (int j = 0; j < NUM_CLASSES; j++)
      if (!g_stage[S].val[j][SW-1]) enc = Y_W'(j);
  end

  always_ff @(posedge clk) out_class <= enc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= g_stage[S].vld;
  end

endmodule
