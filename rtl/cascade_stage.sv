// cascade_stage: level LVL of a cascaded M-level encoder whose full input
// width is N_TOP. Its own input is the NS = L_1*...*L_LVL bits left after
// the OR stages of the levels above it.
//
// Level LVL > 2 ORs its input into NC = NS/L_LVL groups of L_LVL bits,
// encodes the group bits with level LVL-1 (the coarse part), selects the
// winning group with an NS::L_LVL mux and encodes it with an L_LVL-input
// single-level encoder; its position is {coarse, fine}. Level 2 is a 2LPE
// with the unified sizes L_1, L_2. All L_i come from mlpe_pkg::cascade_l,
// computed once from N_TOP and M, as the cascaded construction requires.
// valid comes from the innermost 2LPE (the OR in front of the L_1 encoder).
// The module instantiates itself for the coarse part. When it is linted on
// its own as the top module, Verilator reports that branch's nets as
// undriven or unused; that is an artefact of linting a recursive module as
// top (inside mlpe_cascaded it lints clean and simulates correctly).
// Interface: in_bits[NS-1:0] in; pos[log2(NS)-1:0], valid out.
module cascade_stage #(
  parameter int unsigned N_TOP      = 4096,
  parameter int unsigned M          = 3,
  parameter int unsigned LVL        = 3,
  parameter bit          GATE_BASED = 1'b0,
  parameter int unsigned NS         = mlpe_pkg::cascade_prefix(N_TOP, M, LVL)
) (
  input  logic [NS-1:0]         in_bits,
  output logic [$clog2(NS)-1:0] pos,
  output logic                  valid
);
  if (LVL <= 2) begin : g_base
    pe_2l #(.N(NS), .L1(mlpe_pkg::cascade_l(N_TOP, M, 1)), .GATE_BASED(GATE_BASED)) u_pe (
      .in_bits(in_bits), .pos(pos), .valid(valid));
  end else begin : g_level
    localparam int unsigned LF  = mlpe_pkg::cascade_l(N_TOP, M, LVL);
    localparam int unsigned NC  = NS / LF;
    localparam int unsigned LGC = $clog2(NC);
    localparam int unsigned LGF = $clog2(LF);

    logic [NC-1:0]  group_any;
    logic [LGC-1:0] coarse_pos;
    logic [LF-1:0]  group;
    logic [LGF-1:0] fine_pos;

    or_stage #(.N(NS), .G(NC)) u_or (.in_bits(in_bits), .any(group_any));

    cascade_stage #(.N_TOP(N_TOP), .M(M), .LVL(LVL - 1), .GATE_BASED(GATE_BASED), .NS(NC)) u_coarse (
      .in_bits(group_any), .pos(coarse_pos), .valid(valid));

    wide_mux #(.X(NS), .Y(LF)) u_mux (.d(in_bits), .sel(coarse_pos), .q(group));

    slpe #(.N(LF), .GATE_BASED(GATE_BASED)) u_fine (.in_bits(group), .pos(fine_pos));

    assign pos = {coarse_pos, fine_pos};
  end
endmodule
