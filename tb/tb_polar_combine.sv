// tb_polar_combine -- self-checking test of polar_combine.
//
// Random left and right estimates; the expected codeword is built bit by bit
// here: bit i is beta_l[i] xor beta_r[i] for the left half and beta_r[i-H]
// for the right half.  Combinational block: checked 1 ns after each change.
module tb_polar_combine;
  localparam int unsigned HALF = 16;

  logic [HALF-1:0]   beta_l, beta_r;
  logic [2*HALF-1:0] beta_v;
  int checks = 0, failures = 0;

  polar_combine #(.HALF(HALF)) dut (.beta_l, .beta_r, .beta_v);

  initial begin
    beta_l = '0; beta_r = '0;
    for (int t = 0; t < 1000; t++) begin
      automatic logic [2*HALF-1:0] e;
      beta_l = HALF'($urandom);
      beta_r = HALF'($urandom);
      #1;
      for (int i = 0; i < HALF; i++) begin
        e[i]        = beta_l[i] ^ beta_r[i];
        e[HALF + i] = beta_r[i];
      end
      checks++;
      if (beta_v !== e) begin
        failures++;
        if (failures < 10) $display("FAIL combine %h %h -> %h, expected %h", beta_l, beta_r, beta_v, e);
      end
    end
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
