// tb_mlpe_full: the top-level encoder at its default parameters (4096 bits,
// composed, three levels, mux-based leaves, valid from the first stage).
// It applies the zero word, the all-ones word, every one-hot word, for
// every bit p a word with bit p set over random lower bits, and random
// words, and checks pos and valid against a top-down reference scan.
// Combinational; a watchdog ends the run with a failure if it hangs.
module tb_mlpe_full;
  localparam int N  = 4096;
  localparam int LG = 12;
  int checks = 0, failures = 0;

  logic [N-1:0]  in_bits;
  logic [LG-1:0] pos;
  logic          valid;

  mlpe dut (.in_bits(in_bits), .pos(pos), .valid(valid));

  function automatic logic [N-1:0] rand_word();
    logic [N-1:0] w;
    for (int i = 0; i < N; i += 32) w[i +: 32] = $urandom;
    return w;
  endfunction

  function automatic int ref_pos(input logic [N-1:0] w);
    for (int i = N - 1; i >= 0; i--) if (w[i]) return i;
    return -1;
  endfunction

  task automatic apply(input logic [N-1:0] w);
    int e;
    e = ref_pos(w);
    in_bits = w;
    #1;
    checks += 2;
    if (int'(pos) != (e < 0 ? 0 : e)) begin
      failures++;
      $display("FAIL pos=%0d expected %0d", pos, e);
    end
    if (valid !== (e >= 0)) begin
      failures++;
      $display("FAIL valid=%0b expected %0b", valid, e >= 0);
    end
  endtask

  initial begin : watchdog
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [N-1:0] w;
    apply('0);
    apply('1);
    for (int p = 0; p < N; p++) begin
      w = '0;
      w[p] = 1'b1;
      apply(w);
      w = rand_word();
      for (int i = p + 1; i < N; i++) w[i] = 1'b0;
      w[p] = 1'b1;
      apply(w);
    end
    for (int r = 0; r < 2000; r++) apply(rand_word() >> ($urandom % N));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
