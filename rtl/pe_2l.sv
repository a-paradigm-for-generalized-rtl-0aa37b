// pe_2l: two-level priority encoder (2LPE), N:log2(N).
//
// The N-bit input is cut into L1 slices of L2 = N/L1 bits. The slices are
// ORed (or_stage), giving one bit per slice; a coarse L1-input encoder
// finds the highest non-empty slice; a wide N::L2 mux, steered by the
// coarse result, passes that slice to a fine L2-input encoder, which finds
// the highest 1 inside it. The position is {coarse, fine}. By default
// L1 = 2^ceil(log2(N)/2), the smallest power of two not below sqrt(N)
// (e.g. N = 2048: L1 = 64 slices of 32 bits, coarse 64:6, fine 32:5). L1
// can be overridden; the cascaded encoder does so to keep its own sizes.
// valid is an OR of the L1 slice bits, the extra OR gate after the first
// stage. Coarse and fine encoders are single-level (mux- or gate-based).
// The structure follows the paper; port names and the L1 override are this
// design's.
// Interface: in_bits[N-1:0] in; pos[log2(N)-1:0], valid out. Combinational.
module pe_2l #(
  parameter int unsigned N          = 2048,
  parameter int unsigned L1         = mlpe_pkg::two_level_l1(N),
  parameter bit          GATE_BASED = 1'b0
) (
  input  logic [N-1:0]         in_bits,
  output logic [$clog2(N)-1:0] pos,
  output logic                 valid
);
  localparam int unsigned L2  = N / L1;
  localparam int unsigned LG1 = $clog2(L1);
  localparam int unsigned LG2 = $clog2(L2);

  logic [L1-1:0]  slice_any;
  logic [LG1-1:0] coarse_pos;
  logic [L2-1:0]  slice;
  logic [LG2-1:0] fine_pos;

  or_stage #(.N(N), .G(L1)) u_or (.in_bits(in_bits), .any(slice_any));

  slpe #(.N(L1), .GATE_BASED(GATE_BASED)) u_coarse (.in_bits(slice_any), .pos(coarse_pos));

  wide_mux #(.X(N), .Y(L2)) u_mux (.d(in_bits), .sel(coarse_pos), .q(slice));

  slpe #(.N(L2), .GATE_BASED(GATE_BASED)) u_fine (.in_bits(slice), .pos(fine_pos));

  or_tree #(.W(L1)) u_valid (.a(slice_any), .y(valid));

  assign pos = {coarse_pos, fine_pos};
endmodule
