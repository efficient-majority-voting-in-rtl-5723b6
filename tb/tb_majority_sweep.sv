// tb_majority_sweep: runs both majority decision variants at sizes spanning
// the range the architecture was characterised over (T from 4 to 512 votes,
// K from 2 to 500 classes): the largest T with K = 2 and the largest K with
// T = 16. The corner T = 512, K = 500 also passes but takes verilator about
// ten minutes to build, so it is left out. Every point checks classes and
// cycle counts against the reference; see majority_sweep_point.
module tb_majority_sweep;
  logic clk = 1'b0, rst_n = 1'b0;
  localparam int NP = 6;
  logic done [NP];
  int   ck [NP];
  int   fl [NP];

  always #5 clk = ~clk;

  majority_sweep_point #(.T(4),   .K(2))   p0 (.clk, .rst_n, .done(done[0]), .checks(ck[0]), .failures(fl[0]));
  majority_sweep_point #(.T(7),   .K(5))   p1 (.clk, .rst_n, .done(done[1]), .checks(ck[1]), .failures(fl[1]));
  majority_sweep_point #(.T(64),  .K(15))  p2 (.clk, .rst_n, .done(done[2]), .checks(ck[2]), .failures(fl[2]));
  majority_sweep_point #(.T(128), .K(100)) p3 (.clk, .rst_n, .done(done[3]), .checks(ck[3]), .failures(fl[3]));
  majority_sweep_point #(.T(512), .K(2))   p4 (.clk, .rst_n, .done(done[4]), .checks(ck[4]), .failures(fl[4]));
  majority_sweep_point #(.T(16),  .K(500)) p5 (.clk, .rst_n, .done(done[5]), .checks(ck[5]), .failures(fl[5]));

  function automatic int total(input int a [NP]);
    int s = 0;
    foreach (a[i]) s += a[i];
    return s;
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", total(ck), total(fl) + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    forever begin
      @(negedge clk);
      if (done[0] && done[1] && done[2] && done[3] && done[4] && done[5]) break;
    end
    $display("TB_RESULT checks=%0d failures=%0d", total(ck), total(fl));
    $finish;
  end
endmodule
