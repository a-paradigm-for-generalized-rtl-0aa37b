// tb_or_tree: test of the wide OR tree at every root shape: widths 1, 2,
// 4, 8, 16 (OR2 root), 32 (OR4 root), 64 (default, OR8 root), 128
// (recursion with an OR2 root) and 4096 (two OR8 stages, OR8 root). Each
// width gets the zero word, every one-hot word and random words; y must
// equal (a != 0). Combinational; watchdog included.
module tb_or_tree;
  int checks = 0, failures = 0;
  localparam int NW = 9;
  localparam int WIDTHS [NW] = '{1, 2, 4, 8, 16, 32, 64, 128, 4096};
  bit done [NW];

  for (genvar g = 0; g < NW; g++) begin : g_w
    localparam int W = WIDTHS[g];
    logic [W-1:0] a;
    logic         y;
    if (W == 64) begin : g_dut
      or_tree dut (.a(a), .y(y));             // default width
    end else begin : g_dut
      or_tree #(.W(W)) dut (.a(a), .y(y));
    end

    task automatic apply(input logic [W-1:0] v);
      a = v;
      #1;
      checks++;
      if (y !== (v != '0)) begin
        failures++;
        $display("FAIL W=%0d y=%0b for a!=0 = %0b", W, y, v != '0);
      end
    endtask

    initial begin
      logic [W+31:0] r;
      apply('0);
      apply('1);
      for (int p = 0; p < W; p++) begin
        r = '0;
        r[p] = 1'b1;
        apply(r[W-1:0]);
      end
      for (int k = 0; k < 50; k++) begin
        for (int i = 0; i < W; i += 32) r[i +: 32] = $urandom & $urandom & $urandom;
        apply(r[W-1:0]);
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
