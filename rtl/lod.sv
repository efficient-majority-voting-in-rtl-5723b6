// lod: leading one detector of the majority decision.
//
// Returns a vector with only the most significant '1' of the input kept,
// i.e. the largest power of two not above the input. The majority decision
// subtracts this value from every class count. For an all-zero input the
// output is 1 (the LSB): the source says that once the largest count has
// been reduced to zero one more cycle makes all counts negative, and
// subtracting 1 is what does that. That zero case is this design's reading;
// the rest is the source's.
//
// Purely combinational, WIDTH bits in and out.
module lod #(
  parameter int unsigned WIDTH = 7
) (
  input  logic [WIDTH-1:0] in,
  output logic [WIDTH-1:0] out
);

  always_comb begin
    out = WIDTH'(1);
    for (int i = 0; i < WIDTH; i++)
      if (in[i]) out = WIDTH'(1) << i;
  end

endmodule
