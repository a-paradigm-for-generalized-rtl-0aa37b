// or_tree: OR of W inputs (W a power of two) built as a leaf-heavy tree.
//
// While more than 8 signals remain, they are grouped by eight into OR8
// units (or8_unit), dividing the count by 8 per stage. The last 1, 2, 4 or
// 8 signals are combined by the smallest root that fits: a wire, an OR2
// (NOR2 + inverter), an atomic OR4 (NOR4 + inverter) or one more OR8 unit.
// Big units at the leaves and a small one at the root is the paper's rule
// for wide OR gates; its case split gives, e.g., W = 16: two OR8 units and
// an OR2, W = 32: four OR8 units and an OR4, W = 64: nine OR8 units. For a
// width below 8 (no OR8 stage) the paper gives no rule; this design uses
// the composite OR4 unit (two NOR2 into a NAND2) for W = 4 and an OR2 for
// W = 2.
// Interface: a[W-1:0] in, y = |a out. Purely combinational.
module or_tree #(
  parameter int unsigned W = 64
) (
  input  logic [W-1:0] a,
  output logic         y
);
  // number of OR8 stages before the root
  function automatic int unsigned stages(input int unsigned w);
    int unsigned n;
    n = 0;
    while ((w >> (3 * n)) > 8) n++;
    return n;
  endfunction

  localparam int unsigned NS = stages(W);
  localparam int unsigned WR = W >> (3 * NS);   // signals left for the root

  for (genvar k = 0; k < NS; k++) begin : g_stage
    localparam int unsigned WI = W >> (3 * k);
    logic [WI-1:0]   d;
    logic [WI/8-1:0] q;
    if (k == 0) begin : g_in
      assign d = a;
    end else begin : g_in
      assign d = g_stage[k-1].q;
    end
    localparam int unsigned UI = (WI / 8 > 1024) ? 1024 : WI / 8;  // units per row
    for (genvar h = 0; h < WI / 8 / UI; h++) begin : g_row
      for (genvar l = 0; l < UI; l++) begin : g_unit
        or8_unit u_or8 (.a(d[8*(h*UI + l) +: 8]), .y(q[h*UI + l]));
      end
    end
  end

  logic [WR-1:0] r;
  if (NS == 0) begin : g_root_in
    assign r = a;
  end else begin : g_root_in
    assign r = g_stage[NS-1].q;
  end

  if (WR == 1) begin : g_root1
    assign y = r[0];
  end else if (WR == 2) begin : g_root2
    assign y = ~(~(r[0] | r[1]));                        // OR2
  end else if (WR == 4 && NS == 0) begin : g_root4c
    assign y = ~((~(r[0] | r[1])) & (~(r[2] | r[3])));   // composite OR4 unit
  end else if (WR == 4) begin : g_root4
    assign y = ~(~(|r));                                 // atomic NOR4 + inverter
  end else begin : g_root8
    or8_unit u_root (.a(r), .y(y));
  end
endmodule
