// mux4: single-bit 4::1 multiplexer, o = d[s].
//
// Two structures are available, chosen by NAND_FORM:
//   0 (default): three 2::1 muxes, two selected by s[0] feeding one
//     selected by s[1]. The paper uses this form for its timing results.
//   1: the gate-level form, two select inverters, four 3-input NAND gates
//     (one per channel, enabled by its select code) feeding a 4-input NAND.
// Both compute the same function; the choice only changes the netlist.
// Interface: d[3:0], s[1:0] in; o out. Purely combinational.
module mux4 #(
  parameter bit NAND_FORM = 1'b0
) (
  input  logic [3:0] d,
  input  logic [1:0] s,
  output logic       o
);
  if (NAND_FORM) begin : g_nand
    logic s0_n, s1_n;
    logic [3:0] term_n;
    assign s0_n = ~s[0];
    assign s1_n = ~s[1];
    assign term_n[0] = ~(d[0] & s1_n & s0_n);
    assign term_n[1] = ~(d[1] & s1_n & s[0]);
    assign term_n[2] = ~(d[2] & s[1] & s0_n);
    assign term_n[3] = ~(d[3] & s[1] & s[0]);
    assign o = ~(&term_n);
  end else begin : g_mux2
    logic lo, hi;
    mux2 u_lo  (.i0(d[0]), .i1(d[1]), .s(s[0]), .o(lo));
    mux2 u_hi  (.i0(d[2]), .i1(d[3]), .s(s[0]), .o(hi));
    mux2 u_top (.i0(lo),   .i1(hi),   .s(s[1]), .o(o));
  end
endmodule
