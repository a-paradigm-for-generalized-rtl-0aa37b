// mux_tree: single-bit multiplexer with C channels (C a power of two,
// C >= 2), o = d[sel], built from 4::1 muxes with a fan-in of at most four.
//
// While more than 16 channels remain, they are grouped by four into 4::1
// muxes, each stage consuming two select bits from the bottom (sel[1:0]
// first). The last 2, 4, 8 or 16 channels are finished as in the paper's
// case split: a 2::1 mux; one 4::1 mux; two 4::1 muxes and a 2::1 root;
// four 4::1 muxes and a 4::1 root.
// Interface: d[C-1:0], sel[log2(C)-1:0] in; o out. Purely combinational.
module mux_tree #(
  parameter int unsigned C         = 64,
  parameter bit          NAND_FORM = 1'b0
) (
  input  logic [C-1:0]         d,
  input  logic [$clog2(C)-1:0] sel,
  output logic                 o
);
  localparam int unsigned SW = $clog2(C);

  function automatic int unsigned stages(input int unsigned c);
    int unsigned n;
    n = 0;
    while ((c >> (2 * n)) > 16) n++;
    return n;
  endfunction

  localparam int unsigned NS = stages(C);
  localparam int unsigned CR = C >> (2 * NS);   // channels left for the end

  for (genvar k = 0; k < NS; k++) begin : g_stage
    localparam int unsigned CI = C >> (2 * k);
    logic [CI-1:0]   di;
    logic [CI/4-1:0] q;
    if (k == 0) begin : g_in
      assign di = d;
    end else begin : g_in
      assign di = g_stage[k-1].q;
    end
    localparam int unsigned MI = (CI / 4 > 1024) ? 1024 : CI / 4;  // muxes per row
    for (genvar h = 0; h < CI / 4 / MI; h++) begin : g_row
      for (genvar l = 0; l < MI; l++) begin : g_mux
        mux4 #(.NAND_FORM(NAND_FORM)) u_m (.d(di[4*(h*MI + l) +: 4]), .s(sel[2*k +: 2]), .o(q[h*MI + l]));
      end
    end
  end

  logic [CR-1:0] r;
  if (NS == 0) begin : g_end_in
    assign r = d;
  end else begin : g_end_in
    assign r = g_stage[NS-1].q;
  end

  localparam int unsigned SB = 2 * NS;          // first select bit of the end part

  if (CR == 2) begin : g_end2
    mux2 u_m (.i0(r[0]), .i1(r[1]), .s(sel[SB]), .o(o));
  end else if (CR == 4) begin : g_end4
    mux4 #(.NAND_FORM(NAND_FORM)) u_m (.d(r), .s(sel[SB +: 2]), .o(o));
  end else if (CR == 8) begin : g_end8
    logic [1:0] leaf;
    for (genvar i = 0; i < 2; i++) begin : g_leaf
      mux4 #(.NAND_FORM(NAND_FORM)) u_m (.d(r[4*i +: 4]), .s(sel[SB +: 2]), .o(leaf[i]));
    end
    mux2 u_root (.i0(leaf[0]), .i1(leaf[1]), .s(sel[SB+2]), .o(o));
  end else begin : g_end16
    logic [3:0] leaf;
    for (genvar i = 0; i < 4; i++) begin : g_leaf
      mux4 #(.NAND_FORM(NAND_FORM)) u_m (.d(r[4*i +: 4]), .s(sel[SB +: 2]), .o(leaf[i]));
    end
    mux4 #(.NAND_FORM(NAND_FORM)) u_root (.d(leaf), .s(sel[SB+2 +: 2]), .o(o));
  end

  if (SW != SB + $clog2(CR)) begin : g_bad
    $error("mux_tree: select width mismatch");
  end
endmodule
