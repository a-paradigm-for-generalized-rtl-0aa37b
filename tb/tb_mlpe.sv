// tb_mlpe: end-to-end test of the top-level encoder in every mode it has.
//
// Configurations (all through pe_check, which checks pos and valid against
// an independent reference on zero, all-ones, patterned and random words):
//   c0  4096 bits, composed, 3 levels     (the default configuration)
//   c1  4096 bits, cascaded, 3 levels
//   c2  4096 bits, composed, 3 levels, gate-based atomic encoders
//   c3  4096 bits, composed, 3 levels, valid from the output
//   c4  4096 bits, composed, 4 levels
//   c5  4096 bits, cascaded, 4 levels
//   c6  2048 bits, level limit 2: a plain 2LPE (cascading has no effect)
//   c7    64 bits, level limit 1: a single-level encoder
//   c8     8 bits, cascaded, 5 levels requested: falls back to 3
// Mechanisms counted, each of which must occur at least once: every
// configuration (mode) run, the all-zero (invalid) input seen with valid
// low, and the most significant 1 landing in each of the 64 first-level
// slices of the default encoder (so every coarse code steers the wide mux).
module tb_mlpe;
  localparam int NC = 9;
  int checks [NC], failures [NC], zeros [NC];
  bit done [NC];
  int unsigned hits0 [64];
  int unsigned hits1 [1], hits2 [1], hits3 [1], hits4 [1], hits5 [1], hits6 [1], hits7 [1], hits8 [1];

  pe_check #(.N(4096), .KIND(5), .LVLS(3), .SLICES(64))             c0 (checks[0], failures[0], zeros[0], hits0, done[0]);
  pe_check #(.N(4096), .KIND(5), .LVLS(3), .CASC(1))                c1 (checks[1], failures[1], zeros[1], hits1, done[1]);
  pe_check #(.N(4096), .KIND(5), .LVLS(3), .GATE(1), .STRIDE(3))    c2 (checks[2], failures[2], zeros[2], hits2, done[2]);
  pe_check #(.N(4096), .KIND(5), .LVLS(3), .VOUT(1), .STRIDE(5))    c3 (checks[3], failures[3], zeros[3], hits3, done[3]);
  pe_check #(.N(4096), .KIND(5), .LVLS(4), .STRIDE(3))              c4 (checks[4], failures[4], zeros[4], hits4, done[4]);
  pe_check #(.N(4096), .KIND(5), .LVLS(4), .CASC(1), .STRIDE(3))    c5 (checks[5], failures[5], zeros[5], hits5, done[5]);
  pe_check #(.N(2048), .KIND(5), .LVLS(2), .CASC(1))                c6 (checks[6], failures[6], zeros[6], hits6, done[6]);
  pe_check #(.N(64),   .KIND(5), .LVLS(1))                          c7 (checks[7], failures[7], zeros[7], hits7, done[7]);
  pe_check #(.N(8),    .KIND(5), .LVLS(5), .CASC(1))                c8 (checks[8], failures[8], zeros[8], hits8, done[8]);

  function automatic int sum(input int v [NC]);
    int s;
    s = 0;
    for (int i = 0; i < NC; i++) s += v[i];
    return s;
  endfunction

  function automatic bit all_done();
    for (int i = 0; i < NC; i++) if (!done[i]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin : watchdog
    #5000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", sum(checks), sum(failures) + 1);
    $finish;
  end

  initial begin
    int extra_fail, slices_hit;
    #1;
    while (!all_done()) #10;
    extra_fail = 0;
    for (int i = 0; i < NC; i++) begin
      $display("config c%0d: %0d checks, %0d failures, %0d all-zero words", i, checks[i], failures[i], zeros[i]);
      if (checks[i] == 0 || zeros[i] == 0) begin
        extra_fail++;
        $display("FAIL config c%0d: mode or invalid input never exercised", i);
      end
    end
    slices_hit = 0;
    for (int s = 0; s < 64; s++) if (hits0[s] != 0) slices_hit++;
    $display("default encoder: %0d of 64 first-level slices held the top 1", slices_hit);
    if (slices_hit != 64) extra_fail++;
    $display("TB_RESULT checks=%0d failures=%0d", sum(checks) + NC + 1, sum(failures) + extra_fail);
    $finish;
  end
endmodule
