// tb_wide_mux: test of the X::Y multiplexer at the sizes the encoders use
// and at every end shape of the select tree: 4096::64 (default, 64
// channels), 64::8 (8 channels), 4096::16 (256 channels), 256::16 (16
// channels), 32::16 (2 channels), 16::4 (4 channels) and 1024::1 with the
// NAND-gate 4::1 muxes. For random data every channel is selected in turn
// and q is compared with the channel's Y bits. Combinational; watchdog.
module tb_wide_mux;
  int checks = 0, failures = 0;
  localparam int NW = 7;
  localparam int XS [NW] = '{4096, 64, 4096, 256, 32, 16, 1024};
  localparam int YS [NW] = '{64,    8, 16,   16,  16, 4,  1};
  bit done [NW];

  for (genvar g = 0; g < NW; g++) begin : g_m
    localparam int X = XS[g];
    localparam int Y = YS[g];
    localparam int C = X / Y;
    logic [X-1:0]         d;
    logic [$clog2(C)-1:0] sel;
    logic [Y-1:0]         q;
    if (g == 0) begin : g_dut
      wide_mux dut (.d(d), .sel(sel), .q(q));   // default size
    end else if (g == NW - 1) begin : g_dut
      wide_mux #(.X(X), .Y(Y), .NAND_FORM(1'b1)) dut (.d(d), .sel(sel), .q(q));
    end else begin : g_dut
      wide_mux #(.X(X), .Y(Y)) dut (.d(d), .sel(sel), .q(q));
    end

    initial begin
      logic [X+31:0] r;
      for (int k = 0; k < 4; k++) begin
        for (int i = 0; i < X; i += 32) r[i +: 32] = $urandom;
        d = r[X-1:0];
        for (int c = 0; c < C; c++) begin
          sel = c[$clog2(C)-1:0];
          #1;
          checks++;
          if (q !== d[c*Y +: Y]) begin
            failures++;
            $display("FAIL %0d::%0d channel %0d", X, Y, c);
          end
        end
      end
      done[g] = 1'b1;
    end
  end

  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    #1;
    while (done.and() != 1'b1) #10;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
