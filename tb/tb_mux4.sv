// tb_mux4: exhaustive test of both 4::1 mux forms (three 2::1 muxes, and
// NAND3/NAND4 gates). All 64 combinations of d and s are applied to each
// and o is compared with bit s of d. Combinational; watchdog included.
module tb_mux4;
  int checks = 0, failures = 0;
  logic [3:0] d;
  logic [1:0] s;
  logic       o_mux, o_nand;

  mux4                     dut_mux  (.d(d), .s(s), .o(o_mux));
  mux4 #(.NAND_FORM(1'b1)) dut_nand (.d(d), .s(s), .o(o_nand));

  initial begin : watchdog
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int v = 0; v < 64; v++) begin
      {s, d} = 6'(v);
      #1;
      checks += 2;
      if (o_mux !== d[s]) begin
        failures++;
        $display("FAIL (2::1 form) d=%04b s=%0d o=%0b", d, s, o_mux);
      end
      if (o_nand !== d[s]) begin
        failures++;
        $display("FAIL (NAND form) d=%04b s=%0d o=%0b", d, s, o_nand);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
