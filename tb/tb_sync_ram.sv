// tb_sync_ram: writes random words to a 784 x 8 memory (the size of the x
// memory), reads them back, and checks the one-cycle read latency and that a
// read of the address being written returns the old word.
module tb_sync_ram;
  localparam int unsigned DEPTH = 784;
  localparam int unsigned W = 8;
  localparam int unsigned AW = $clog2(DEPTH);

  logic          clk = 1'b0;
  logic          we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0]  wdata = '0, rdata;
  logic [W-1:0]  model [DEPTH];
  int checks = 0, failures = 0;

  sync_ram #(.DEPTH(DEPTH), .WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = W'($urandom); model[a] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    // random reads with random writes; check one cycle later
    repeat (5000) begin
      int unsigned ra, wa;
      logic [W-1:0] expect_q;
      ra = $urandom_range(DEPTH - 1);
      wa = ($urandom_range(3) == 0) ? ra : $urandom_range(DEPTH - 1);
      @(negedge clk);
      raddr = AW'(ra);
      we = $urandom_range(1);
      waddr = AW'(wa);
      wdata = W'($urandom);
      expect_q = model[ra];            // old word even if written now
      if (we) model[wa] = wdata;
      @(negedge clk);
      we = 1'b0;
      checks++;
      if (rdata != expect_q) begin
        failures++;
        $display("FAIL: mem[%0d] read %h, expected %h", ra, rdata, expect_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
