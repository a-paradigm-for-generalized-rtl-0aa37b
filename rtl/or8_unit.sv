// or8_unit: 8-input OR gate built as four 2-input NOR gates feeding one
// 4-input NAND gate (NAND4(NOR2, NOR2, NOR2, NOR2) = OR8 by De Morgan).
// This structure keeps the slow series-PMOS NOR gates small and puts the
// fan-in of four into the NAND gate. It is the leaf cell of every wide OR
// gate in the multi-level encoders. The gate structure follows the paper;
// only its logic is expressed here (no transistor sizing).
// Interface: a[7:0] in, y out. Purely combinational.
module or8_unit (
  input  logic [7:0] a,
  output logic       y
);
  logic [3:0] nor2_q;

  always_comb begin
    for (int g = 0; g < 4; g++) nor2_q[g] = ~(a[2*g] | a[2*g+1]);
    y = ~(&nor2_q);   // NAND4
  end
endmodule
