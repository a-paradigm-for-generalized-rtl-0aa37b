// mlpe: generic N:log2(N) priority encoder with valid output (top level).
//
// pos is the index of the most significant 1 of in_bits (floor(log2(x))
// for the input read as an unsigned number); valid is 0 only for an
// all-zero input, where pos is 0. The whole circuit is combinational.
//
// Parameters choose the architecture, in the spirit of the generics of the
// paper's generator:
//   N                  input width, a power of two (default 4096)
//   MAX_LVLS           limit on the number of levels m (default 3)
//   USE_CASCADING      0: composed MLPE (default), 1: cascaded MLPE; no
//                      effect when m <= 2 (a 2LPE or single-level encoder)
//   USE_GATE_OPTIMIZED atomic encoders gate-based instead of mux-based
//   VALID_FROM_OUTPUT  0: valid is the OR of the first-stage slice bits
//                      (default, the method used for the paper's FPGA
//                      numbers); 1: valid = in_bits[0] | (|pos), the
//                      cheaper alternative, which only needs to tell an
//                      all-zero input from 00...01.
// The default, a 4096:12 composed three-level encoder with mux-based leaves,
// is the configuration the paper recommends for 4096 bits on ASIC when
// cost and delay are weighed equally.
// Interface: in_bits[N-1:0] in; pos[log2(N)-1:0], valid out. No clock.
module mlpe #(
  parameter int unsigned N                  = 4096,
  parameter int unsigned MAX_LVLS           = 3,
  parameter bit          USE_CASCADING      = 1'b0,
  parameter bit          USE_GATE_OPTIMIZED = 1'b0,
  parameter bit          VALID_FROM_OUTPUT  = 1'b0
) (
  input  logic [N-1:0]         in_bits,
  output logic [$clog2(N)-1:0] pos,
  output logic                 valid
);
  logic core_valid;

  if (N < 2 || (N & (N - 1)) != 0) begin : g_bad_n
    $error("mlpe: N must be a power of two and at least 2");
  end

  if (USE_CASCADING && MAX_LVLS > 2) begin : g_cascaded
    mlpe_cascaded #(.N(N), .MAX_LVLS(MAX_LVLS), .GATE_BASED(USE_GATE_OPTIMIZED)) u_core (
      .in_bits(in_bits), .pos(pos), .valid(core_valid));
  end else begin : g_composed
    mlpe_composed #(.N(N), .MAX_LVLS(MAX_LVLS), .GATE_BASED(USE_GATE_OPTIMIZED)) u_core (
      .in_bits(in_bits), .pos(pos), .valid(core_valid));
  end

  if (VALID_FROM_OUTPUT) begin : g_valid_out
    assign valid = in_bits[0] | (|pos);
  end else begin : g_valid_or
    assign valid = core_valid;
  end
endmodule
