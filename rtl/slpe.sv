// slpe: atomic single-level priority encoder used at the leaves of the
// multi-level encoders. GATE_BASED selects the gate-based form
// (slpe_gate) instead of the mux-based chain (slpe_mux, the default, which
// is the form the paper reports results for).
// Interface: in_bits[N-1:0] in, pos[log2(N)-1:0] out. Combinational.
module slpe #(
  parameter int unsigned N          = 8,
  parameter bit          GATE_BASED = 1'b0
) (
  input  logic [N-1:0]         in_bits,
  output logic [$clog2(N)-1:0] pos
);
  if (GATE_BASED) begin : g_gate
    slpe_gate #(.N(N)) u_pe (.in_bits(in_bits), .pos(pos));
  end else begin : g_mux
    slpe_mux #(.N(N)) u_pe (.in_bits(in_bits), .pos(pos));
  end
endmodule
