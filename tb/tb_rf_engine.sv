// tb_rf_engine: end-to-end test of the random forest engine at a reduced
// size (8 trees of 5 levels, 64 coordinates, 4 classes), built twice: once
// with the iterative and once with the pipelined majority decision. Both
// engines get the same trees and input vectors.
//
// For every vector the testbench walks all trees itself, takes the majority
// (highest class on a draw) and checks the trees' votes, the class and the
// cycle of the result: 3l+1 cycles for the trees plus the latency of the
// majority decision. Mechanisms counted, each must occur: left and right
// branches, draws, best case (largest count a power of two) and worst case
// (largest count 2^k-1 with the most '1' bits) of the iterative decision, a
// vector started in the same cycle the previous vote appears (trees and
// majority decision overlapping), and results of the pipelined variant.
// Forced vote patterns come from rewriting the leaf level of chosen trees
// with a single class.
module tb_rf_engine;
  import tb_ref_pkg::*;

  localparam int unsigned T   = 8;
  localparam int unsigned L   = 5;
  localparam int unsigned P   = 64;
  localparam int unsigned K   = 4;
  localparam int unsigned XW  = 8;
  localparam int unsigned NW  = L + 1;
  localparam int unsigned CW  = (P > 1) ? $clog2(P) : 1;
  localparam int unsigned YW  = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned TW  = (T > 1) ? $clog2(T) : 1;
  localparam int unsigned TREE_LAT = 3 * L + 1;
  localparam int unsigned N_IMAGES = 60;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          x_we = 1'b0, t_we = 1'b0, start = 1'b0;
  logic [CW-1:0] x_waddr = '0, t_wcoord = '0;
  logic [XW-1:0] x_wdata = '0, t_wvalue = '0;
  logic [TW-1:0] t_tree = '0;
  logic [NW-1:0] t_waddr = '0;
  logic          ready_i, ready_p, vv_i, vv_p, cv_i, cv_p;
  logic [YW-1:0] votes_i [T];
  logic [YW-1:0] votes_p [T];
  logic [YW-1:0] class_i, class_p;

  rf_engine #(.NUM_TREES(T), .TREE_LEVELS(L), .NUM_CLASSES(K), .NUM_COORDS(P), .X_WIDTH(XW),
              .MAJORITY_PIPELINED(1'b0)) dut_i (
    .clk, .rst_n, .x_we, .x_waddr, .x_wdata, .t_we, .t_tree, .t_waddr, .t_wcoord, .t_wvalue,
    .start, .ready(ready_i), .votes_valid(vv_i), .votes(votes_i), .class_valid(cv_i), .class_out(class_i));
  rf_engine #(.NUM_TREES(T), .TREE_LEVELS(L), .NUM_CLASSES(K), .NUM_COORDS(P), .X_WIDTH(XW),
              .MAJORITY_PIPELINED(1'b1)) dut_p (
    .clk, .rst_n, .x_we, .x_waddr, .x_wdata, .t_we, .t_tree, .t_waddr, .t_wcoord, .t_wvalue,
    .start, .ready(ready_p), .votes_valid(vv_p), .votes(votes_p), .class_valid(cv_p), .class_out(class_p));

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  int unsigned n_left = 0, n_right = 0, n_draw = 0, n_best = 0, n_worst = 0, n_overlap = 0, n_pipe = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  int unsigned coord_tab [T][2 ** NW];
  int unsigned value_tab [T][2 ** NW];
  int unsigned x_tab [P];

  // expected votes, classes and result cycles, in start order
  int unsigned q_votes [$];
  int unsigned q_vote_cyc [$];
  int unsigned q_cls_i [$], q_cyc_i [$];
  int unsigned q_cls_p [$], q_cyc_p [$];

  always @(negedge clk) begin
    if (rst_n && vv_i) begin
      int unsigned ec;
      ec = q_vote_cyc.pop_front();
      checks++;
      if (cyc != ec) begin failures++; $display("FAIL: votes at cycle %0d, expected %0d", cyc, ec); end
      for (int t = 0; t < T; t++) begin
        int unsigned ev;
        ev = q_votes.pop_front();
        checks += 2;
        if (votes_i[t] != YW'(ev)) begin failures++; $display("FAIL: tree %0d voted %0d, expected %0d", t, votes_i[t], ev); end
        if (votes_p[t] != YW'(ev)) begin failures++; $display("FAIL: tree %0d (pipelined engine) voted %0d, expected %0d", t, votes_p[t], ev); end
      end
    end
    if (rst_n && cv_i) begin
      int unsigned ec, ey;
      ec = q_cls_i.pop_front();
      ey = q_cyc_i.pop_front();
      checks += 2;
      if (class_i != YW'(ec)) begin failures++; $display("FAIL: iterative class %0d, expected %0d", class_i, ec); end
      if (cyc != ey) begin failures++; $display("FAIL: iterative result at %0d, expected %0d", cyc, ey); end
    end
    if (rst_n && cv_p) begin
      int unsigned ec, ey;
      ec = q_cls_p.pop_front();
      ey = q_cyc_p.pop_front();
      checks += 2;
      n_pipe++;
      if (class_p != YW'(ec)) begin failures++; $display("FAIL: pipelined class %0d, expected %0d", class_p, ec); end
      if (cyc != ey) begin failures++; $display("FAIL: pipelined result at %0d, expected %0d", cyc, ey); end
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_node(input int unsigned t, input int unsigned n);
    @(negedge clk);
    t_we = 1'b1; t_tree = TW'(t); t_waddr = NW'(n);
    t_wcoord = CW'(coord_tab[t][n]); t_wvalue = XW'(value_tab[t][n]);
  endtask

  task automatic end_write();
    @(negedge clk);
    t_we = 1'b0;
  endtask

  // leaf level of tree t: one class everywhere (cls >= 0) or random classes
  task automatic set_leaves(input int unsigned t, input int cls);
    for (int n = 2 ** L; n < 2 ** NW; n++) begin
      value_tab[t][n] = (cls >= 0) ? cls : $urandom_range(K - 1);
      write_node(t, n);
    end
    end_write();
  endtask

  task automatic load_x();
    foreach (x_tab[c]) x_tab[c] = $urandom_range(255);
    for (int c = 0; c < P; c++) begin
      @(negedge clk);
      x_we = 1'b1; x_waddr = CW'(c); x_wdata = XW'(x_tab[c]);
    end
    @(negedge clk);
    x_we = 1'b0;
  endtask

  // walk every tree for the current x and queue what the engines must output;
  // t0 is the cycle in which start is high
  task automatic expect_run(input int unsigned t0);
    int v[] = new[T];
    int unsigned m;
    for (int t = 0; t < T; t++) begin
      int unsigned n = 1;
      for (int l = 0; l < L; l++) begin
        if (x_tab[coord_tab[t][n]] <= value_tab[t][n]) begin n = 2 * n; n_left++; end
        else begin n = 2 * n + 1; n_right++; end
      end
      v[t] = int'(value_tab[t][n] % (1 << YW));
      q_votes.push_back(v[t]);
    end
    m = max_count(v, K);
    q_vote_cyc.push_back(t0 + TREE_LAT);
    q_cls_i.push_back(majority(v, K));
    q_cyc_i.push_back(t0 + TREE_LAT + iter_latency(T, m));
    q_cls_p.push_back(majority(v, K));
    q_cyc_p.push_back(t0 + TREE_LAT + pipe_latency(T));
    if (is_draw(v, K)) n_draw++;
    if (popcount(m) == 1) n_best++;
    if (iter_latency(T, m) == clog2i(T) + flog2i(T) + 2) n_worst++;
  endtask

  task automatic run_one();
    while (!(ready_i && ready_p)) @(negedge clk);
    start = 1'b1;
    expect_run(cyc);
    @(negedge clk);
    start = 1'b0;
  endtask

  task automatic drain();
    int guard = 0;
    while ((q_cls_i.size() != 0 || q_cls_p.size() != 0) && guard < 1000) begin
      @(negedge clk);
      guard++;
    end
  endtask

  initial begin
    for (int t = 0; t < T; t++)
      for (int n = 1; n < 2 ** NW; n++) begin
        coord_tab[t][n] = $urandom_range(P - 1);
        value_tab[t][n] = (n >= 2 ** L) ? $urandom_range(K - 1) : $urandom_range(255);
      end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < T; t++)
      for (int n = 1; n < 2 ** NW; n++) write_node(t, n);
    end_write();

    // random forest, one vector at a time
    repeat (N_IMAGES) begin
      load_x();
      run_one();
      drain();
    end

    // the same vector started again in the cycle each vote appears
    begin
      int unsigned t_start;
      start = 1'b1;
      for (int r = 0; r < 6; r++) begin
        t_start = cyc;
        expect_run(t_start);
        if (r > 0) n_overlap++;
        @(negedge clk);
        while (cyc < t_start + TREE_LAT) @(negedge clk);
        checks++;
        if (!ready_i) begin failures++; $display("FAIL: engine not ready when the vote appears"); end
      end
      start = 1'b0;
      drain();
    end

    // worst case: 2^F-1 trees vote for class 2, F = floor(log2 T)
    for (int t = 0; t < (1 << flog2i(T)) - 1; t++) set_leaves(t, 2);
    repeat (3) begin load_x(); run_one(); drain(); end
    // best case: 2^F trees vote for class 2, the others spread over the rest
    set_leaves((1 << flog2i(T)) - 1, 2);
    for (int t = 1 << flog2i(T); t < T; t++) set_leaves(t, (t % K == 2) ? 3 : int'(t % K));
    repeat (3) begin load_x(); run_one(); drain(); end
    // draw: the lower half of the trees votes 2, the upper half 3
    for (int t = T / 2; t < T; t++) set_leaves(t, 3);
    repeat (2) begin load_x(); run_one(); drain(); end

    checks++;
    if (n_left == 0 || n_right == 0 || n_draw == 0 || n_best == 0 || n_worst == 0 ||
        n_overlap == 0 || n_pipe == 0 || q_cls_i.size() != 0 || q_cls_p.size() != 0) begin
      failures++;
      $display("FAIL: a mechanism never occurred or results are missing");
    end
    $display("left %0d right %0d draws %0d best %0d worst %0d overlapped starts %0d pipelined results %0d",
             n_left, n_right, n_draw, n_best, n_worst, n_overlap, n_pipe);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
