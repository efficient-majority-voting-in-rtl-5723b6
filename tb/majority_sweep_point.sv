// majority_sweep_point: testbench helper that exercises both majority
// decision variants at one size (T votes, K classes).
//
// It applies NUM_SETS random vote sets, one every ceil(log2 T)+1 cycles (the
// shortest start interval of the iterative variant), feeding the same votes
// to an iterative and a pipelined instance. Half of the sets give one class a
// random extra share so that large counts and clear winners occur. Each
// result is compared with a count-and-compare reference and must arrive at
// the cycle given by the latency formulas. done rises when all results are
// in; checks and failures are running totals.
module majority_sweep_point #(
  parameter int unsigned T = 4,
  parameter int unsigned K = 2,
  parameter int unsigned NUM_SETS = 50
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  import tb_ref_pkg::*;

  localparam int unsigned YW = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned A  = (T > 1) ? $clog2(T) : 1;

  logic          in_valid = 1'b0;
  logic [YW-1:0] votes [T];
  logic          ov_i, ov_p;
  logic [YW-1:0] cls_i, cls_p;
  int unsigned   cyc = 0;

  majority_iterative #(.NUM_VOTES(T), .NUM_CLASSES(K)) u_iter (
    .clk, .rst_n, .in_valid, .votes, .out_valid(ov_i), .out_class(cls_i));
  majority_pipelined #(.NUM_VOTES(T), .NUM_CLASSES(K)) u_pipe (
    .clk, .rst_n, .in_valid, .votes, .out_valid(ov_p), .out_class(cls_p));

  int unsigned q_cls_i [$], q_cyc_i [$], q_cls_p [$], q_cyc_p [$];
  int n_i = 0, n_p = 0;

  initial begin
    checks = 0;
    failures = 0;
    done = 1'b0;
  end

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (rst_n && ov_i) begin
      int unsigned ec, ey;
      ec = q_cls_i.pop_front(); ey = q_cyc_i.pop_front();
      checks += 2; n_i++;
      if (cls_i != YW'(ec)) begin failures++; $display("FAIL T=%0d K=%0d iterative: class %0d, expected %0d", T, K, cls_i, ec); end
      if (cyc != ey) begin failures++; $display("FAIL T=%0d K=%0d iterative: cycle %0d, expected %0d", T, K, cyc, ey); end
    end
    if (rst_n && ov_p) begin
      int unsigned ec, ey;
      ec = q_cls_p.pop_front(); ey = q_cyc_p.pop_front();
      checks += 2; n_p++;
      if (cls_p != YW'(ec)) begin failures++; $display("FAIL T=%0d K=%0d pipelined: class %0d, expected %0d", T, K, cls_p, ec); end
      if (cyc != ey) begin failures++; $display("FAIL T=%0d K=%0d pipelined: cycle %0d, expected %0d", T, K, cyc, ey); end
    end
  end

  initial begin
    int v[];
    foreach (votes[i]) votes[i] = '0;
    while (!rst_n) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int n = 0; n < NUM_SETS; n++) begin
      int unsigned fav, share;
      @(negedge clk);
      v = new[T];
      fav = $urandom_range(K - 1);
      share = (n % 2) ? $urandom_range(T) : 0;
      foreach (v[i]) v[i] = (i < share) ? fav : $urandom_range(K - 1);
      foreach (v[i]) votes[i] = YW'(v[i]);
      in_valid = 1'b1;
      q_cls_i.push_back(majority(v, K)); q_cyc_i.push_back(cyc + iter_latency(T, max_count(v, K)));
      q_cls_p.push_back(majority(v, K)); q_cyc_p.push_back(cyc + pipe_latency(T));
      @(negedge clk);
      in_valid = 1'b0;
      repeat (A - 1) @(negedge clk);
    end
    repeat (3 * A + 10) @(negedge clk);
    checks++;
    if (n_i != NUM_SETS || n_p != NUM_SETS) begin
      failures++;
      $display("FAIL T=%0d K=%0d: %0d/%0d results of %0d", T, K, n_i, n_p, NUM_SETS);
    end
    done = 1'b1;
  end
endmodule
