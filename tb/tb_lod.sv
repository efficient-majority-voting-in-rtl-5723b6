// tb_lod: exhaustive test of the leading one detector for 7- and 3-bit
// inputs against a reference that searches from the top bit down; an
// all-zero input must give 1.
module tb_lod;
  logic [6:0] in7, out7;
  logic [2:0] in3, out3;
  int checks = 0, failures = 0;

  lod #(.WIDTH(7)) dut7 (.in(in7), .out(out7));
  lod #(.WIDTH(3)) dut3 (.in(in3), .out(out3));

  function automatic int unsigned ref_lod(input int unsigned v, input int unsigned w);
    for (int i = int'(w) - 1; i >= 0; i--) if (v[i]) return 1 << i;
    return 1;
  endfunction

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int unsigned v = 0; v < 128; v++) begin
      in7 = 7'(v);
      in3 = 3'(v);
      #1;
      checks++;
      if (out7 != 7'(ref_lod(v, 7))) begin
        failures++;
        $display("FAIL: lod7(%b) = %b", in7, out7);
      end
      if (v < 8) begin
        checks++;
        if (out3 != 3'(ref_lod(v, 3))) begin
          failures++;
          $display("FAIL: lod3(%b) = %b", in3, out3);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
