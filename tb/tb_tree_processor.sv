// tb_tree_processor: tree processor at full size (14 levels, 784
// coordinates, 10 classes). A random complete tree is written into the tree
// memories, random input vectors into the x memory; each vote is compared
// with a walk of the same tree in the testbench (A <= B goes to node 2n,
// otherwise 2n+1) and must come 3*14+1 = 43 cycles after start. Part of the
// run holds start high, so a new vector starts in the cycle the previous
// vote appears and votes come every 43 cycles.
module tb_tree_processor;
  localparam int unsigned L   = 14;
  localparam int unsigned P   = 784;
  localparam int unsigned K   = 10;
  localparam int unsigned XW  = 8;
  localparam int unsigned NW  = L + 1;
  localparam int unsigned CW  = $clog2(P);
  localparam int unsigned YW  = $clog2(K);
  localparam int unsigned LAT = 3 * L + 1;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          x_we = 1'b0, t_we = 1'b0, start = 1'b0;
  logic [CW-1:0] x_waddr = '0, t_wcoord = '0;
  logic [XW-1:0] x_wdata = '0, t_wvalue = '0;
  logic [NW-1:0] t_waddr = '0;
  logic          ready, y_valid;
  logic [YW-1:0] y;

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  int unsigned n_left = 0, n_right = 0, n_back = 0;

  tree_processor #(.TREE_LEVELS(L), .NUM_COORDS(P), .NUM_CLASSES(K), .X_WIDTH(XW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  int unsigned coord_tab [2 ** NW];
  int unsigned value_tab [2 ** NW];
  int unsigned x_tab [P];

  function automatic int unsigned walk();
    int unsigned n = 1;
    for (int l = 0; l < L; l++) begin
      if (x_tab[coord_tab[n]] <= value_tab[n]) begin n = 2 * n;     n_left++;  end
      else                                     begin n = 2 * n + 1; n_right++; end
    end
    return value_tab[n] % (1 << YW);
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_x();
    for (int c = 0; c < P; c++) begin
      @(negedge clk);
      x_we = 1'b1; x_waddr = CW'(c); x_wdata = XW'(x_tab[c]);
    end
    @(negedge clk);
    x_we = 1'b0;
  endtask

  initial begin
    int unsigned exp_y, t0, last_y;
    // a complete tree; leaves hold classes 0..K-1
    for (int n = 1; n < 2 ** NW; n++) begin
      coord_tab[n] = $urandom_range(P - 1);
      value_tab[n] = (n >= 2 ** L) ? $urandom_range(K - 1) : $urandom_range(255);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 1; n < 2 ** NW; n++) begin
      @(negedge clk);
      t_we = 1'b1; t_waddr = NW'(n); t_wcoord = CW'(coord_tab[n]); t_wvalue = XW'(value_tab[n]);
    end
    @(negedge clk);
    t_we = 1'b0;

    // one vector at a time
    repeat (40) begin
      foreach (x_tab[c]) x_tab[c] = $urandom_range(255);
      load_x();
      exp_y = walk();
      checks++;
      if (!ready) begin failures++; $display("FAIL: not ready"); end
      start = 1'b1;
      t0 = cyc;
      @(negedge clk);
      start = 1'b0;
      while (!y_valid && cyc < t0 + 200) @(negedge clk);
      checks += 2;
      if (cyc != t0 + LAT) begin failures++; $display("FAIL: y after %0d cycles, expected %0d", cyc - t0, LAT); end
      if (y != YW'(exp_y)) begin failures++; $display("FAIL: y=%0d expected %0d", y, exp_y); end
    end

    // start held high: same vector back to back, a vote every 3l+1 cycles
    exp_y = walk();
    start = 1'b1;
    last_y = 0;
    repeat (10) begin
      @(negedge clk);
      while (!y_valid) @(negedge clk);
      checks += 2;
      if (y != YW'(exp_y)) begin failures++; $display("FAIL: back-to-back y=%0d expected %0d", y, exp_y); end
      if (last_y != 0) begin
        if (cyc - last_y != LAT) begin failures++; $display("FAIL: votes %0d cycles apart", cyc - last_y); end
        else n_back++;
      end
      last_y = cyc;
    end
    start = 1'b0;

    checks++;
    if (n_left == 0 || n_right == 0 || n_back == 0) begin
      failures++;
      $display("FAIL: left %0d right %0d back-to-back %0d", n_left, n_right, n_back);
    end
    $display("left branches %0d, right branches %0d, back-to-back votes %0d", n_left, n_right, n_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
