// tb_class_counter: checks the decoders and adder trees. A 40-vote,
// 10-class counter and a 7-vote, 3-class counter (odd sizes at every adder
// stage) get a new random vote set in every cycle; each set of counts must
// match a direct count and appear ceil(log2 T) cycles after its votes.
module tb_class_counter;
  import tb_ref_pkg::*;

  localparam int unsigned T1 = 40, K1 = 10, T2 = 7, K2 = 3;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [3:0] votes1 [T1];
  logic [1:0] votes2 [T2];
  logic       cv1, cv2;
  logic [6:0] counts1 [K1];
  logic [3:0] counts2 [K2];
  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  class_counter #(.NUM_VOTES(T1), .NUM_CLASSES(K1)) dut1 (
    .clk, .rst_n, .in_valid, .votes(votes1), .count_valid(cv1), .counts(counts1));
  class_counter #(.NUM_VOTES(T2), .NUM_CLASSES(K2)) dut2 (
    .clk, .rst_n, .in_valid, .votes(votes2), .count_valid(cv2), .counts(counts2));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // expected counts, K values per vote set, in issue order
  int unsigned exp1 [$];
  int unsigned exp2 [$];
  int unsigned cyc1 [$], cyc2 [$];

  always @(negedge clk) begin
    if (rst_n && cv1) begin
      int unsigned e [K1];
      int unsigned ec;
      foreach (e[j]) e[j] = exp1.pop_front();
      ec = cyc1.pop_front();
      checks++;
      if (cyc != ec) begin failures++; $display("FAIL: T=40 counts at %0d, expected %0d", cyc, ec); end
      for (int j = 0; j < K1; j++) begin
        checks++;
        if (counts1[j] != 7'(e[j])) begin failures++; $display("FAIL: T=40 count[%0d]=%0d expected %0d", j, counts1[j], e[j]); end
      end
    end
    if (rst_n && cv2) begin
      int unsigned e [K2];
      int unsigned ec;
      foreach (e[j]) e[j] = exp2.pop_front();
      ec = cyc2.pop_front();
      checks++;
      if (cyc != ec) begin failures++; $display("FAIL: T=7 counts at %0d, expected %0d", cyc, ec); end
      for (int j = 0; j < K2; j++) begin
        checks++;
        if (counts2[j] != 4'(e[j])) begin failures++; $display("FAIL: T=7 count[%0d]=%0d expected %0d", j, counts2[j], e[j]); end
      end
    end
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (votes1[i]) votes1[i] = '0;
    foreach (votes2[i]) votes2[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      int unsigned e1 [K1];
      int unsigned e2 [K2];
      int unsigned bias;
      @(negedge clk);
      bias = $urandom_range(K1 - 1);
      foreach (e1[j]) e1[j] = 0;
      foreach (e2[j]) e2[j] = 0;
      // some sets all-equal, to reach the full count
      foreach (votes1[i]) begin
        votes1[i] = (n % 10 == 0) ? 4'(bias) : 4'($urandom_range(K1 - 1));
        e1[votes1[i]]++;
      end
      foreach (votes2[i]) begin
        votes2[i] = (n % 10 == 0) ? 2'(bias % K2) : 2'($urandom_range(K2 - 1));
        e2[votes2[i]]++;
      end
      in_valid = (n % 13 != 12);
      if (in_valid) begin
        foreach (e1[j]) exp1.push_back(e1[j]); cyc1.push_back(cyc + clog2i(T1));
        foreach (e2[j]) exp2.push_back(e2[j]); cyc2.push_back(cyc + clog2i(T2));
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp1.size() != 0 || exp2.size() != 0) begin
      failures++;
      $display("FAIL: %0d/%0d count sets missing", exp1.size(), exp2.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
