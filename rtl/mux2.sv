// mux2: single-bit 2::1 multiplexer, o = s ? i1 : i0.
// In silicon the paper's cell for this is an 8-transistor static CMOS mux;
// here only its logic function is written. It is the atomic cell of the
// 4::1 muxes, of the wide x::y muxes and of the mux-based encoder chain.
// Interface: i0, i1, s in; o out. Purely combinational.
module mux2 (
  input  logic i0,
  input  logic i1,
  input  logic s,
  output logic o
);
  assign o = s ? i1 : i0;
endmodule
