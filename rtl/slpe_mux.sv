// slpe_mux: mux-based single-level priority encoder, N:log2(N).
//
// pos is the index of the most significant 1 in in_bits (0 when the input
// is all zero; a separate valid signal tells that case apart). The encoder
// is a chain of N-2 word-wide 2:1 muxes: the running result starts as
// in_bits[1] (index 1 or 0), and stage j (j = 2 .. N-1) replaces it with the
// constant j when in_bits[j] is 1. Later stages win, so the highest set bit
// decides. Stage j only needs as many bits as j has; the upper bits of the
// narrower early stages are constant zero. Chain order and widths follow
// the paper's mux-based encoder; it is the atomic encoder used at the
// bottom of every multi-level encoder here. in_bits[0] is read by nothing:
// a 1 there gives position 0, the same as no 1 at all.
// Interface: in_bits[N-1:0] in, pos[log2(N)-1:0] out. Combinational; the
// critical path runs through all N-2 muxes.
module slpe_mux #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0]         in_bits,
  output logic [$clog2(N)-1:0] pos
);
  localparam int unsigned LG = $clog2(N);

  if (N == 2) begin : g_two
    assign pos = in_bits[1];
  end else begin : g_chain
    logic [LG-1:0] chain [1:N-1];
    assign chain[1] = LG'(in_bits[1]);
    for (genvar j = 2; j < N; j++) begin : g_stage
      assign chain[j] = in_bits[j] ? LG'(j) : chain[j-1];
    end
    assign pos = chain[N-1];
  end
endmodule
