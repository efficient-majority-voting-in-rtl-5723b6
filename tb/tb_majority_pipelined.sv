// tb_majority_pipelined: self-checking test of the pipelined majority
// decision at its default size (40 votes, 10 classes).
//
// A new vote set is applied in every clock cycle (random sets mixed with
// sets whose largest count is 31, which needs every subtraction stage, and
// with draws). Every result is compared with a count-and-compare reference,
// and must appear exactly ceil(log2 T) + floor(log2(T+1)) + 1 cycles after
// its votes. A gap in the input stream checks that out_valid follows it.
module tb_majority_pipelined;
  import tb_ref_pkg::*;

  localparam int unsigned T   = 40;
  localparam int unsigned K   = 10;
  localparam int unsigned Y_W = $clog2(K);

  logic           clk = 1'b0;
  logic           rst_n = 1'b0;
  logic           in_valid = 1'b0;
  logic [Y_W-1:0] votes [T];
  logic           out_valid;
  logic [Y_W-1:0] out_class;

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  int unsigned n_worst = 0, n_draw = 0, n_back = 0;

  majority_pipelined #(.NUM_VOTES(T), .NUM_CLASSES(K)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  int unsigned exp_class [$];
  int unsigned exp_cycle [$];
  int unsigned last_out = 0;

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      checks += 2;
      if (cyc == last_out + 1) n_back++;
      last_out = cyc;
      if (exp_class.size() == 0) begin
        failures += 2;
        $display("FAIL: unexpected out_valid at cycle %0d", cyc);
      end else begin
        int unsigned ec, ey;
        ec = exp_class.pop_front();
        ey = exp_cycle.pop_front();
        if (out_class != Y_W'(ec)) begin
          failures++;
          $display("FAIL: class %0d, expected %0d at cycle %0d", out_class, ec, cyc);
        end
        if (cyc != ey) begin
          failures++;
          $display("FAIL: result at cycle %0d, expected %0d", cyc, ey);
        end
      end
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v[];
    int unsigned sel;
    foreach (votes[i]) votes[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      v = new[T];
      sel = $urandom_range(3);
      case (sel)
        0: begin  // largest count 31, the rest spread out
          int c = $urandom_range(K - 1);
          foreach (v[i]) v[i] = (i < 31) ? c : (c + 1 + i % (K - 1)) % K;
        end
        1: begin  // draw of two classes
          int a = $urandom_range(K - 1), b = (a + 1 + $urandom_range(K - 2)) % K;
          foreach (v[i]) v[i] = (i < 16) ? a : (i < 32) ? b : (a + b + 1 + i) % K == a || (a + b + 1 + i) % K == b ? (a + b + 3) % K : (a + b + 1 + i) % K;
        end
        default: foreach (v[i]) v[i] = $urandom_range(K - 1);
      endcase
      foreach (v[i]) votes[i] = Y_W'(v[i]);
      in_valid = (n % 97 != 96);  // an idle cycle now and then
      if (in_valid) begin
        exp_class.push_back(majority(v, K));
        exp_cycle.push_back(cyc + pipe_latency(T));
        if (popcount(max_count(v, K)) == flog2i(T + 1)) n_worst++;
        if (is_draw(v, K)) n_draw++;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (30) @(negedge clk);
    checks++;
    if (exp_class.size() != 0 || n_worst == 0 || n_draw == 0 || n_back < 900) begin
      failures++;
      $display("FAIL: missing %0d, worst %0d, draws %0d, back-to-back %0d",
               exp_class.size(), n_worst, n_draw, n_back);
    end
    $display("worst-case sets %0d, draws %0d, results in consecutive cycles %0d", n_worst, n_draw, n_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
