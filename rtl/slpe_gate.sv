// slpe_gate: gate-based single-level priority encoder, N:log2(N).
//
// The encoder is written directly as Boolean logic: input j is the winner
// when it is 1 and every input above it is 0 (a one-hot "winner" vector),
// and output bit b is the OR of the winners whose index has bit b set.
// The "any higher input is 1" terms are a running OR from the top. The
// result equals slpe_mux; the paper offers both forms and uses this one
// when its gate-optimised option is chosen. Input all zero gives pos = 0.
// Interface: in_bits[N-1:0] in, pos[log2(N)-1:0] out. Combinational.
module slpe_gate #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0]         in_bits,
  output logic [$clog2(N)-1:0] pos
);
  localparam int unsigned LG = $clog2(N);

  logic [N-1:0] higher;   // higher[j] = |in_bits[N-1:j+1]
  logic [N-1:0] winner;

  always_comb begin
    higher[N-1] = 1'b0;
    for (int j = N - 2; j >= 0; j--) higher[j] = higher[j+1] | in_bits[j+1];
    winner = in_bits & ~higher;
    pos = '0;
    for (int b = 0; b < LG; b++)
      for (int j = 0; j < N; j++)
        if (((j >> b) & 1) == 1) pos[b] = pos[b] | winner[j];
  end
endmodule
