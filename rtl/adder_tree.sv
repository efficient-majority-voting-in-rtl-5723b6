// adder_tree: registered binary adder tree that counts the '1's among N bits.
//
// Stage s (s = 1 .. ceil(log2 N)) adds pairs of the previous stage's values
// with the smallest width that cannot overflow: 1-bit operands and 2-bit sums
// in the first stage, one bit more in every further stage, so the last stage
// is a ceil(log2 N)-bit adder with a (ceil(log2 N)+1)-bit result. Every stage
// ends in a register. Where a stage has an odd number of values the last one
// is carried to the next stage through a register only. The count appears
// ceil(log2 N) cycles after the bits were applied.
//
// All of this follows the source except the handling of odd stage sizes,
// which it does not describe. Data registers are not reset; a valid flag
// travels alongside in the module that uses the tree.
module adder_tree #(
  parameter int unsigned N = 40,
  localparam int unsigned STAGES = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned OUT_W  = STAGES + 1
) (
  input  logic             clk,
  input  logic [N-1:0]     bits,
  output logic [OUT_W-1:0] count
);

  for (genvar s = 0; s <= STAGES; s++) begin : g_stage
    // number of values in stage s: ceil(N / 2^s)
    localparam int unsigned NS = (N + (1 << s) - 1) >> s;
    logic [s:0] v [NS];

    if (s == 0) begin : g_in
      for (genvar i = 0; i < NS; i++) begin : g_bit
        assign v[i] = bits[i];
      end
    end else begin : g_add
      // number of values in the stage before
      localparam int unsigned NP = (N + (1 << (s - 1)) - 1) >> (s - 1);
      always_ff @(posedge clk) begin
        for (int i = 0; i < NS; i++) begin
          if (2 * i + 1 < NP)
            v[i] <= {1'b0, g_stage[s-1].v[2*i]} + {1'b0, g_stage[s-1].v[2*i+1]};
          else
            v[i] <= {1'b0, g_stage[s-1].v[2*i]};
        end
      end
    end
  end

  assign count = g_stage[STAGES].v[0];

endmodule
