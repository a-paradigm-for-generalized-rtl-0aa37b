// or_stage: the first stage of a two-level (or cascaded) encoder level.
// It cuts the N-bit input into G slices of N/G consecutive bits and ORs
// each slice with an or_tree, giving one "slice is non-empty" bit per
// slice. Slice s covers bits [s*N/G +: N/G], so slice 0 holds the least
// significant bits and bit s of the result belongs to slice s.
// Interface: in_bits[N-1:0] in, any[G-1:0] out. Purely combinational.
module or_stage #(
  parameter int unsigned N = 4096,
  parameter int unsigned G = 64
) (
  input  logic [N-1:0] in_bits,
  output logic [G-1:0] any
);
  localparam int unsigned S = N / G;

  // Slices are generated in rows of at most 1024 so that no single
  // generate loop grows beyond what elaboration tools unroll comfortably.
  localparam int unsigned GI = (G > 1024) ? 1024 : G;

  for (genvar h = 0; h < G / GI; h++) begin : g_row
    for (genvar l = 0; l < GI; l++) begin : g_slice
      localparam int unsigned SL = h * GI + l;
      or_tree #(.W(S)) u_or (.a(in_bits[SL*S +: S]), .y(any[SL]));
    end
  end
endmodule
