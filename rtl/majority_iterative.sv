// majority_iterative: majority decision whose run time is logarithmic in the
// number of votes (the iterative architecture).
//
// Idea: write every class count in two's complement with a 0 sign bit and
// keep them in registers. Each cycle, OR together the counts that are still
// non-negative (AND gates with the inverted sign bits), find the leading one
// of that OR (the LOD), and subtract this power of two from every count. The
// largest count loses one of its '1' bits per cycle; counts below it turn
// negative no later than it does. When the largest count has reached zero
// one more cycle (LOD of zero = 1) makes all counts negative. The class that
// was non-negative in the cycle before that is the winner; on a draw the
// highest class number wins (the encoder is a priority encoder towards the
// top). The encoder output is registered, so it shows the state of the cycle
// before all counts went negative.
//
// Timing, with in_valid in cycle 0 and A = ceil(log2 NUM_VOTES):
//   counts leave the adder trees in cycle A, are loaded into the subtraction
//   registers at the next edge, and out_valid is high in cycle
//   A + popcount(max count) + 2, i.e. between A+3 and A+floor(log2 T)+2.
// A new decision may start every A+1 cycles; an assertion checks that a load
// never cuts off a decision still running.
//
// From the source: decoders, K registered adder trees of minimum width, the
// appended sign bit, the AND/OR/LOD loop, the ALL One detector, the encoder
// with a register, the draw rule and the cycle counts. This design's choices:
// the LOD of zero, and that "all negative" is detected on the subtractor
// outputs and registered, which gives the same out_valid cycle as testing the
// registers but also reports a decision whose last step coincides with the
// load of the next one.
module majority_iterative #(
  parameter int unsigned NUM_VOTES   = rf_pkg::NUM_TREES,
  parameter int unsigned NUM_CLASSES = rf_pkg::NUM_CLASSES,
  localparam int unsigned Y_W     = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1,
  localparam int unsigned LAT     = (NUM_VOTES > 1) ? $clog2(NUM_VOTES) : 1,
  localparam int unsigned COUNT_W = LAT + 1,
  localparam int unsigned SW      = COUNT_W + 1
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

  logic [SW-1:0]      r    [NUM_CLASSES];   // two's complement residual counts
  logic [SW-1:0]      diff [NUM_CLASSES];
  logic [COUNT_W-1:0] or_bits;
  logic [COUNT_W-1:0] lead;
  logic               all_neg_next;
  logic [Y_W-1:0]     enc;
  logic               active;

  always_comb begin
    or_bits = '0;
    for (int j = 0; j < NUM_CLASSES; j++)
      or_bits |= r[j][COUNT_W-1:0] & {COUNT_W{~r[j][SW-1]}};
  end

  lod #(.WIDTH(COUNT_W)) u_lod (.in(or_bits), .out(lead));

  always_comb begin
    all_neg_next = 1'b1;
    enc          = '0;
    for (int j = 0; j < NUM_CLASSES; j++) begin
      diff[j] = r[j] - {1'b0, lead};
      all_neg_next &= diff[j][SW-1];
      if (!r[j][SW-1]) enc = Y_W'(j);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      out_valid <= 1'b0;
      for (int j = 0; j < NUM_CLASSES; j++) r[j] <= '1;
    end else begin
      out_valid <= active & all_neg_next;
      if (count_valid) begin
        active <= 1'b1;
        for (int j = 0; j < NUM_CLASSES; j++) r[j] <= {1'b0, counts[j]};
      end else if (active) begin
        active <= ~all_neg_next;
        r      <= diff;
      end
    end
  end

  always_ff @(posedge clk) out_class <= enc;

  // Starting decisions closer together than A+1 cycles would overwrite one
  // that has not finished.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                                 count_valid && active |-> all_neg_next)
    else $error("majority_iterative: new counts loaded before the previous decision finished");

endmodule
