// pe_check: stimulus and checking harness shared by the encoder testbenches.
//
// It instantiates one priority encoder, chosen by KIND (0 slpe_mux,
// 1 slpe_gate, 2 pe_2l, 3 mlpe_composed, 4 mlpe_cascaded, 5 mlpe), and
// drives it with:
//   * the all-zero word (pos must be 0, valid 0),
//   * the all-ones word,
//   * for every bit position p (or every STRIDE-th one for wide inputs):
//     a one-hot word with bit p set, and a word with bit p set, random bits
//     below it and zeros above it,
//   * RANDOM_VECS fully random words.
// The expected position is known by construction for the patterned words
// and computed by a plain top-down scan (ref_pos) for random ones, so the
// reference shares no structure with the encoders. pos is compared for
// every word, valid for every encoder that has one. When the run ends,
// done rises and the counters hold the totals; slice_hits counts words
// whose most significant 1 fell into each of the first-level slices of
// SLICES slices (used by the end-to-end test to show every slice was hit).
// The encoders are combinational: each word is held for one time unit.
module pe_check #(
  parameter int unsigned N           = 64,
  parameter int unsigned KIND        = 3,
  parameter int unsigned LVLS        = 3,
  parameter bit          GATE        = 1'b0,
  parameter int unsigned L1          = 0,     // pe_2l only; 0 = its default
  parameter bit          CASC        = 1'b0,  // mlpe only
  parameter bit          VOUT        = 1'b0,  // mlpe only
  parameter int unsigned STRIDE      = 1,
  parameter int unsigned RANDOM_VECS = 100,
  parameter int unsigned SLICES      = 1
) (
  output int          checks,
  output int          failures,
  output int          zero_words,
  output int unsigned slice_hits [SLICES],
  output bit          done
);
  localparam int unsigned LG = $clog2(N);
  localparam bit HAS_VALID = (KIND >= 2);

  logic [N-1:0]  stim;
  logic [LG-1:0] pos;
  logic          valid;

  if (KIND == 0) begin : g_dut
    slpe_mux #(.N(N)) dut (.in_bits(stim), .pos(pos));
    assign valid = 1'b0;
  end else if (KIND == 1) begin : g_dut
    slpe_gate #(.N(N)) dut (.in_bits(stim), .pos(pos));
    assign valid = 1'b0;
  end else if (KIND == 2 && L1 == 0) begin : g_dut
    pe_2l #(.N(N), .GATE_BASED(GATE)) dut (.in_bits(stim), .pos(pos), .valid(valid));
  end else if (KIND == 2) begin : g_dut
    pe_2l #(.N(N), .L1(L1), .GATE_BASED(GATE)) dut (.in_bits(stim), .pos(pos), .valid(valid));
  end else if (KIND == 3) begin : g_dut
    mlpe_composed #(.N(N), .MAX_LVLS(LVLS), .GATE_BASED(GATE)) dut (
      .in_bits(stim), .pos(pos), .valid(valid));
  end else if (KIND == 4) begin : g_dut
    mlpe_cascaded #(.N(N), .MAX_LVLS(LVLS), .GATE_BASED(GATE)) dut (
      .in_bits(stim), .pos(pos), .valid(valid));
  end else begin : g_dut
    mlpe #(.N(N), .MAX_LVLS(LVLS), .USE_CASCADING(CASC), .USE_GATE_OPTIMIZED(GATE),
           .VALID_FROM_OUTPUT(VOUT)) dut (.in_bits(stim), .pos(pos), .valid(valid));
  end

  function automatic logic [N-1:0] rand_word();
    logic [N+31:0] w;
    w = '0;
    for (int i = 0; i < N; i += 32) w[i +: 32] = $urandom;
    return w[N-1:0];
  endfunction

  // reference: plain scan from the top
  function automatic int ref_pos(input logic [N-1:0] w);
    for (int i = N - 1; i >= 0; i--) if (w[i]) return i;
    return -1;
  endfunction

  task automatic apply(input logic [N-1:0] w, input int expect_pos);
    stim = w;
    #1;
    checks++;
    if (expect_pos < 0) begin
      zero_words++;
      if (pos !== '0) begin
        failures++;
        $display("FAIL N=%0d KIND=%0d zero word: pos=%0d", N, KIND, pos);
      end
    end else begin
      if (SLICES > 1) slice_hits[expect_pos / (N / SLICES)]++;
      if (int'(pos) != expect_pos) begin
        failures++;
        $display("FAIL N=%0d KIND=%0d: pos=%0d expected %0d", N, KIND, pos, expect_pos);
      end
    end
    if (HAS_VALID) begin
      checks++;
      if (valid !== (expect_pos >= 0)) begin
        failures++;
        $display("FAIL N=%0d KIND=%0d: valid=%0b for expected pos %0d", N, KIND, valid, expect_pos);
      end
    end
  endtask

  initial begin
    logic [N-1:0] w;
    checks = 0;
    failures = 0;
    zero_words = 0;
    done = 1'b0;
    for (int s = 0; s < SLICES; s++) slice_hits[s] = 0;
    stim = '0;
    #1;
    apply('0, -1);
    apply('1, N - 1);
    for (int p = 0; p < N; p += STRIDE) begin
      w = '0;
      w[p] = 1'b1;
      apply(w, p);
      w = rand_word();
      for (int i = p + 1; i < N; i++) w[i] = 1'b0;
      w[p] = 1'b1;
      apply(w, p);
    end
    if (STRIDE > 1) begin   // always cover the top and the bottom bit
      w = '0; w[N-1] = 1'b1; apply(w, N - 1);
      w = '0; w[0] = 1'b1;   apply(w, 0);
    end
    for (int r = 0; r < int'(RANDOM_VECS); r++) begin
      w = rand_word();
      if (r % 4 == 1) w = w >> ($urandom % N);   // move the top 1 around
      apply(w, ref_pos(w));
    end
    done = 1'b1;
  end
endmodule
