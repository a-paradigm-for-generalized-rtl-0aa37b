// wide_mux: X::Y multiplexer. The X input bits form X/Y channels of Y bits
// each (channel c is d[c*Y +: Y]) and the Y-bit output is the channel
// numbered by sel. It is built as Y single-bit mux trees working in
// parallel, tree b picking bit b of every channel. In the encoders this
// mux routes the slice holding the most significant 1 to the fine encoder.
// Interface: d[X-1:0], sel[log2(X/Y)-1:0] in; q[Y-1:0] out. Combinational.
module wide_mux #(
  parameter int unsigned X         = 4096,
  parameter int unsigned Y         = 64,
  parameter bit          NAND_FORM = 1'b0
) (
  input  logic [X-1:0]               d,
  input  logic [$clog2(X/Y)-1:0]     sel,
  output logic [Y-1:0]               q
);
  localparam int unsigned C = X / Y;

  // Channels are gathered in rows of at most 1024 so that no single
  // generate loop grows beyond what elaboration tools unroll comfortably.
  localparam int unsigned CI = (C > 1024) ? 1024 : C;

  for (genvar b = 0; b < Y; b++) begin : g_bit
    logic [C-1:0] column;
    for (genvar h = 0; h < C / CI; h++) begin : g_row
      for (genvar l = 0; l < CI; l++) begin : g_col
        assign column[h*CI + l] = d[(h*CI + l)*Y + b];
      end
    end
    mux_tree #(.C(C), .NAND_FORM(NAND_FORM)) u_tree (.d(column), .sel(sel), .o(q[b]));
  end
endmodule
