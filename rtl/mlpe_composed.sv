// mlpe_composed: composed multi-level priority encoder (MLPE-O), N:log2(N).
//
// A composed m-level encoder is a two-level encoder whose coarse and fine
// encoders are themselves composed (m-1)-level encoders; at m = 2 it is a
// plain 2LPE (pe_2l) with single-level leaves, at m = 1 a single-level
// encoder. Every level computes its own split, L1 = 2^ceil(log2(n)/2)
// slices of L2 = n/L1 bits, from its own input width n. Example, N = 4096,
// m = 3: 64 OR gates of 64 bits feed a 64:6 2LPE (8 x 8:1 OR, 8:3 coarse,
// 64::8 mux, 8:3 fine) as coarse encoder; a 4096::64 mux feeds another
// 64:6 2LPE as fine encoder; the output is 6 MSBs from the coarse and 6
// LSBs from the fine encoder.
// MAX_LVLS is a limit, as in the paper's generator: a sub-encoder becomes
// single-level when its level budget is used up or its input is narrower
// than 4 bits (that second rule is this design's choice). valid is the OR
// of this level's slice bits (an OR tree of the input at m = 1).
// The module instantiates itself for the sub-encoders. When it is linted
// on its own as the top module, Verilator reports the recursive branch's
// nets as undriven or unused; that is an artefact of linting a recursive
// module as top (the same module inside any parent lints clean and
// simulates correctly), not a wiring fault.
// Interface: in_bits[N-1:0] in; pos[log2(N)-1:0], valid out. Combinational.
module mlpe_composed #(
  parameter int unsigned N          = 4096,
  parameter int unsigned MAX_LVLS   = 3,
  parameter bit          GATE_BASED = 1'b0
) (
  input  logic [N-1:0]         in_bits,
  output logic [$clog2(N)-1:0] pos,
  output logic                 valid
);
  localparam int unsigned LVLS = mlpe_pkg::composed_levels(N, MAX_LVLS);

  if (LVLS == 1) begin : g_single
    slpe #(.N(N), .GATE_BASED(GATE_BASED)) u_pe (.in_bits(in_bits), .pos(pos));
    or_tree #(.W(N)) u_valid (.a(in_bits), .y(valid));
  end else if (LVLS == 2) begin : g_two
    pe_2l #(.N(N), .GATE_BASED(GATE_BASED)) u_pe (.in_bits(in_bits), .pos(pos), .valid(valid));
  end else begin : g_multi
    localparam int unsigned L1  = mlpe_pkg::two_level_l1(N);
    localparam int unsigned L2  = N / L1;
    localparam int unsigned LG1 = $clog2(L1);
    localparam int unsigned LG2 = $clog2(L2);

    logic [L1-1:0]  slice_any;
    logic [LG1-1:0] coarse_pos;
    logic [L2-1:0]  slice;
    logic [LG2-1:0] fine_pos;
    logic           coarse_valid_unused, fine_valid_unused;

    or_stage #(.N(N), .G(L1)) u_or (.in_bits(in_bits), .any(slice_any));

    mlpe_composed #(.N(L1), .MAX_LVLS(LVLS - 1), .GATE_BASED(GATE_BASED)) u_coarse (
      .in_bits(slice_any), .pos(coarse_pos), .valid(coarse_valid_unused));

    wide_mux #(.X(N), .Y(L2)) u_mux (.d(in_bits), .sel(coarse_pos), .q(slice));

    mlpe_composed #(.N(L2), .MAX_LVLS(LVLS - 1), .GATE_BASED(GATE_BASED)) u_fine (
      .in_bits(slice), .pos(fine_pos), .valid(fine_valid_unused));

    or_tree #(.W(L1)) u_valid (.a(slice_any), .y(valid));

    assign pos = {coarse_pos, fine_pos};
  end
endmodule
