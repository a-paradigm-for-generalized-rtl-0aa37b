// tb_or8_unit: exhaustive test of the OR8 unit. All 256 input words are
// applied and y is compared with (a != 0). Combinational; a watchdog ends
// the run with a failure if it does not finish.
module tb_or8_unit;
  int checks = 0, failures = 0;
  logic [7:0] a;
  logic       y;

  or8_unit dut (.a(a), .y(y));

  initial begin : watchdog
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      a = 8'(v);
      #1;
      checks++;
      if (y !== (v != 0)) begin
        failures++;
        $display("FAIL a=%02h y=%0b", a, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
