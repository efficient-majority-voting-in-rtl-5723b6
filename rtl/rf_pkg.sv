// rf_pkg: constants and helper functions shared by the random forest engine.
//
// The default sizes are those of the handwritten digit example the design
// was sized for: 40 trees, 14 levels of decision nodes, 10 classes and
// 28x28 = 784 input coordinates. The input word width of 8 bits (one grey
// pixel) is a choice of this design; the source states no word width.
package rf_pkg;

  parameter int unsigned NUM_TREES   = 40;   // T
  parameter int unsigned TREE_LEVELS = 14;   // l, levels of decision nodes
  parameter int unsigned NUM_CLASSES = 10;   // K
  parameter int unsigned NUM_COORDS  = 784;  // p, length of the input vector x
  parameter int unsigned X_WIDTH     = 8;    // bits per coordinate of x (assumed)

  // floor(log2(n)) for n >= 1
  function automatic int unsigned flog2(input int unsigned n);
    int unsigned r;
    r = 0;
    while ((n >> (r + 1)) != 0) r++;
    return r;
  endfunction

  // Number of subtraction stages needed by the pipelined majority decision:
  // the largest number of '1' bits any count 0..T can hold, floor(log2(T+1)).
  function automatic int unsigned sub_stages(input int unsigned t);
    return flog2(t + 1);
  endfunction

endpackage
