// mlpe_cascaded: cascaded multi-level priority encoder (MLPE-A), N:log2(N).
//
// A cascaded m-level encoder is a 2LPE whose coarse encoder is replaced by
// a cascaded (m-1)-level encoder, with one set of sizes L_1..L_m
// (product N) shared by all levels:
//   L_i = 2^ceil(log2(N / (L_1*...*L_{i-1})) / (m-i+1)).
// Example, N = 4096, m = 3: L = 16, 16, 16. 256 OR gates of 16 bits feed a
// 256:8 2LPE (16 x 16:1 OR, 16:4, 256::16 mux, 16:4); its 8-bit result
// steers a 4096::16 mux into a 16:4 encoder for the 4 LSBs.
// MAX_LVLS is a limit: the number of levels drops until every L_i is at
// least 2 (this rule is this design's choice). m = 2 gives a plain 2LPE
// and m = 1 a single-level encoder with an OR tree for valid.
// Interface: in_bits[N-1:0] in; pos[log2(N)-1:0], valid out. Combinational.
module mlpe_cascaded #(
  parameter int unsigned N          = 4096,
  parameter int unsigned MAX_LVLS   = 3,
  parameter bit          GATE_BASED = 1'b0
) (
  input  logic [N-1:0]         in_bits,
  output logic [$clog2(N)-1:0] pos,
  output logic                 valid
);
  localparam int unsigned LVLS = mlpe_pkg::cascaded_levels(N, MAX_LVLS);

  if (LVLS == 1) begin : g_single
    slpe #(.N(N), .GATE_BASED(GATE_BASED)) u_pe (.in_bits(in_bits), .pos(pos));
    or_tree #(.W(N)) u_valid (.a(in_bits), .y(valid));
  end else begin : g_multi
    cascade_stage #(.N_TOP(N), .M(LVLS), .LVL(LVLS), .GATE_BASED(GATE_BASED), .NS(N)) u_top (
      .in_bits(in_bits), .pos(pos), .valid(valid));
  end
endmodule
