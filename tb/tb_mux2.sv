// tb_mux2: exhaustive test of the 2::1 mux (all 8 input combinations,
// o must equal s ? i1 : i0). Combinational; watchdog included.
module tb_mux2;
  int checks = 0, failures = 0;
  logic i0, i1, s, o;

  mux2 dut (.i0(i0), .i1(i1), .s(s), .o(o));

  initial begin : watchdog
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {s, i1, i0} = 3'(v);
      #1;
      checks++;
      if (o !== (v[2] ? v[1] : v[0])) begin
        failures++;
        $display("FAIL s=%0b i1=%0b i0=%0b o=%0b", s, i1, i0, o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
