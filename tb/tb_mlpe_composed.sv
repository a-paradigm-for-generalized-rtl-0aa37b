// tb_mlpe_composed: self-checking test of the composed multi-level encoder.
// Runs the default 4096-bit three-level encoder plus smaller and deeper
// configurations (4 levels at 1024 bits, gate-based leaves, the level limit
// reached at 8 bits, the 2-level and 1-level cases) through pe_check.
// Every configuration is driven by pe_check, which compares the position
// (and valid, where present) with an independent reference; the counts
// are summed here. The encoders are combinational, so there is no clock;
// a watchdog ends the run with a failure if the checks never finish.
module tb_mlpe_composed;
  localparam int NC = 6;
  int checks [NC], failures [NC], zeros [NC];
  bit done [NC];
  int unsigned hits0 [1];
  int unsigned hits1 [1];
  int unsigned hits2 [1];
  int unsigned hits3 [1];
  int unsigned hits4 [1];
  int unsigned hits5 [1];

  pe_check #(.N(4096), .KIND(3), .LVLS(3)) c0 (checks[0], failures[0], zeros[0], hits0, done[0]);
  pe_check #(.N(1024), .KIND(3), .LVLS(4)) c1 (checks[1], failures[1], zeros[1], hits1, done[1]);
  pe_check #(.N(512), .KIND(3), .LVLS(3), .GATE(1)) c2 (checks[2], failures[2], zeros[2], hits2, done[2]);
  pe_check #(.N(8), .KIND(3), .LVLS(3)) c3 (checks[3], failures[3], zeros[3], hits3, done[3]);
  pe_check #(.N(256), .KIND(3), .LVLS(2)) c4 (checks[4], failures[4], zeros[4], hits4, done[4]);
  pe_check #(.N(16), .KIND(3), .LVLS(1)) c5 (checks[5], failures[5], zeros[5], hits5, done[5]);

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
    #1;
    while (!all_done()) #10;
    $display("TB_RESULT checks=%0d failures=%0d", sum(checks), sum(failures));
    $finish;
  end
endmodule
