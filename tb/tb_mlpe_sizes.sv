// tb_mlpe_sizes: the top-level encoder at the input widths and
// architectures the paper's recommendation tables list, from 64:6 to
// 2048:11. Each row builds the encoder the tables name for that width
// (lowest-cost and balanced columns): 2LPE, composed (-O) or cascaded (-A)
// 3-, 4- and 5-level encoders. Every configuration goes through pe_check:
// zero and all-ones words, patterned words with the top 1 at a stride of
// bit positions (every position up to 2048 bits) and random words, with
// pos and valid compared against a reference scan. The 4096-bit
// encoders are covered by tb_mlpe and tb_mlpe_full; wider encoders
// (8192 bits and up) elaborate, but their simulation models take far
// too long to compile for a regression run, so they are left out here.
module tb_mlpe_sizes;
  localparam int NC = 5;
  int checks [NC], failures [NC], zeros [NC];
  bit done [NC];
  int unsigned h0 [1], h1 [1], h2 [1], h3 [1], h4 [1];

  pe_check #(.N(64),     .KIND(5), .LVLS(2))                                          c0  (checks[0],  failures[0],  zeros[0],  h0,  done[0]);
  pe_check #(.N(128),    .KIND(5), .LVLS(3))                                          c1  (checks[1],  failures[1],  zeros[1],  h1,  done[1]);
  pe_check #(.N(512),    .KIND(5), .LVLS(3), .CASC(1))                                c2  (checks[2],  failures[2],  zeros[2],  h2,  done[2]);
  pe_check #(.N(1024),   .KIND(5), .LVLS(4))                                          c3  (checks[3],  failures[3],  zeros[3],  h3,  done[3]);
  pe_check #(.N(2048),   .KIND(5), .LVLS(2))                                          c4  (checks[4],  failures[4],  zeros[4],  h4,  done[4]);

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
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", sum(checks), sum(failures) + 1);
    $finish;
  end

  initial begin
    #1;
    while (!all_done()) #10;
    for (int i = 0; i < NC; i++)
      $display("config c%0d: %0d checks, %0d failures", i, checks[i], failures[i]);
    $display("TB_RESULT checks=%0d failures=%0d", sum(checks), sum(failures));
    $finish;
  end
endmodule
