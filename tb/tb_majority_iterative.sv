// tb_majority_iterative: self-checking test of the iterative majority
// decision at its default size (40 votes, 10 classes).
//
// Vote sets are crafted to hit the best case (largest count a power of two),
// the worst case (largest count 31 = 11111b), draws, a unanimous vote and
// random votes. Each result is compared with a count-and-compare reference
// and its latency with ceil(log2 T) + popcount(max) + 2 cycles. A second
// phase starts a decision every ceil(log2 T)+1 cycles, the shortest interval
// the architecture allows, and checks every result again.
module tb_majority_iterative;
  import tb_ref_pkg::*;

  localparam int unsigned T   = 40;
  localparam int unsigned K   = 10;
  localparam int unsigned Y_W = $clog2(K);
  localparam int unsigned A   = $clog2(T);

  logic           clk = 1'b0;
  logic           rst_n = 1'b0;
  logic           in_valid = 1'b0;
  logic [Y_W-1:0] votes [T];
  logic           out_valid;
  logic [Y_W-1:0] out_class;

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  int unsigned n_best = 0, n_worst = 0, n_draw = 0;

  majority_iterative #(.NUM_VOTES(T), .NUM_CLASSES(K)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // expected results, in issue order
  int unsigned exp_class [$];
  int unsigned exp_cycle [$];

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      checks += 2;
      if (exp_class.size() == 0) begin
        failures += 2;
        $display("FAIL: unexpected out_valid at cycle %0d", cyc);
      end else begin
        int unsigned ec, ey;
        ec = exp_class.pop_front();
        ey = exp_cycle.pop_front();
        if (out_class != Y_W'(ec)) begin
          failures++;
          $display("FAIL: class %0d, expected %0d", out_class, ec);
        end
        if (cyc != ey) begin
          failures++;
          $display("FAIL: result at cycle %0d, expected %0d", cyc, ey);
        end
      end
    end
  end

  // present one vote set during one cycle
  task automatic issue(input int v[]);
    int unsigned m;
    @(negedge clk);
    foreach (v[i]) votes[i] = Y_W'(v[i]);
    in_valid = 1'b1;
    m = max_count(v, K);
    exp_class.push_back(majority(v, K));
    exp_cycle.push_back(cyc + iter_latency(T, m));
    if (popcount(m) == 1) n_best++;
    if (iter_latency(T, m) == A + flog2i(T) + 2) n_worst++;
    if (is_draw(v, K)) n_draw++;
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic wait_idle();
    int guard = 0;
    while (exp_class.size() != 0 && guard < 1000) begin
      @(negedge clk);
      guard++;
    end
  endtask

  // votes: first n_a for class a, next n_b for class b, the rest random
  function automatic void make(ref int v[], input int a, input int n_a, input int b, input int n_b);
    v = new[T];
    foreach (v[i]) v[i] = $urandom_range(K - 1);
    for (int i = 0; i < n_a; i++) v[i] = a;
    for (int i = n_a; i < n_a + n_b; i++) v[i] = b;
    // keep the rest below the intended maximum: spread it over other classes
    for (int i = n_a + n_b; i < T; i++) v[i] = (a + 1 + i % (K - 2)) % K == b ? (b + 1) % K : (a + 1 + i % (K - 2)) % K;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v[];
    foreach (votes[i]) votes[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // crafted sets, one at a time
    make(v, 4, 32, 0, 0); issue(v); wait_idle();     // max 32: best case
    make(v, 2, 31, 0, 0); issue(v); wait_idle();     // max 31: worst case
    make(v, 1, 16, 0, 0); issue(v); wait_idle();     // max 16: best case
    make(v, 3, 15, 0, 0); issue(v); wait_idle();     // max 15
    make(v, 2, 20, 7, 20); issue(v); wait_idle();    // draw: class 7 wins
    make(v, 9, 12, 0, 12); issue(v); wait_idle();    // draw: class 9 wins
    make(v, 0, 7, 9, 7); issue(v); wait_idle();      // draw with low counts
    v = new[T]; foreach (v[i]) v[i] = 5; issue(v); wait_idle();  // unanimous
    v = new[T]; foreach (v[i]) v[i] = i % K; issue(v); wait_idle();  // 10-way draw

    // random sets, one at a time
    repeat (200) begin
      v = new[T];
      foreach (v[i]) v[i] = $urandom_range(K - 1);
      issue(v);
      wait_idle();
    end

    // back to back: a new decision every A+1 cycles
    repeat (200) begin
      v = new[T];
      if ($urandom_range(3) == 0) make(v, $urandom_range(K - 1), 31, 0, 0);
      else foreach (v[i]) v[i] = $urandom_range(K - 1);
      issue(v);
      repeat (A - 1) @(negedge clk);
    end
    wait_idle();

    checks++;
    if (n_best == 0 || n_worst == 0 || n_draw == 0) begin
      failures++;
      $display("FAIL: best %0d worst %0d draw %0d cases", n_best, n_worst, n_draw);
    end
    checks++;
    if (exp_class.size() != 0) begin
      failures++;
      $display("FAIL: %0d results missing", exp_class.size());
    end
    $display("best-case decisions %0d, worst-case %0d, draws %0d", n_best, n_worst, n_draw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
