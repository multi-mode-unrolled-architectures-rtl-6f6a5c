// tb_polar_spc -- self-checking test of polar_spc (single-parity-check node).
//
// Tests the largest SPC node of the decoder, 4 LLRs of 5 bits, with random
// LLRs of small magnitude so ties occur.  Expected, worked out here: the hard
// decisions; when their parity is odd, the bit of least magnitude (the first
// one on a tie) is flipped.  Also checks that every output has even parity.
// Combinational block: checked 1 ns after each change.
module tb_polar_spc;
  localparam int unsigned LEN = 4;
  localparam int unsigned Q   = 5;

  logic [LEN-1:0][Q-1:0] alpha;
  logic [LEN-1:0]        beta;
  int checks = 0, failures = 0, n_flip = 0;

  polar_spc #(.LEN(LEN), .Q(Q)) dut (.alpha, .beta);

  initial begin
    alpha = '0;
    for (int t = 0; t < 3000; t++) begin
      automatic int a [LEN];
      automatic logic [LEN-1:0] e;
      automatic int p = 0, k = 0;
      for (int i = 0; i < LEN; i++) begin
        a[i] = int'($urandom_range(t % 2 ? 30 : 8, 0)) - (t % 2 ? 15 : 4);
        alpha[i] = Q'(a[i]);
        e[i] = a[i] < 0;
        p ^= int'(e[i]);
      end
      for (int i = 1; i < LEN; i++)
        if ((a[i] < 0 ? -a[i] : a[i]) < (a[k] < 0 ? -a[k] : a[k])) k = i;
      if (p != 0) begin e[k] = ~e[k]; n_flip++; end
      #1;
      checks++;
      if (beta !== e) begin
        failures++;
        if (failures < 10) $display("FAIL spc %0d %0d %0d %0d -> %b, expected %b", a[0], a[1], a[2], a[3], beta, e);
      end
      checks++;
      if (^beta) begin failures++; $display("FAIL odd parity output %b", beta); end
    end
    checks++; if (n_flip == 0) begin failures++; $display("FAIL no flip exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
