// tb_polar_rep -- self-checking test of polar_rep (Repetition node).
//
// Tests the largest Repetition node of the decoder, 8 LLRs of 5 bits, with
// random LLRs biased towards one sign so both decisions and sums near zero
// occur.  Expected: all bits 1 when the exact sum of the LLRs is negative,
// otherwise all 0, worked out here with plain integers.  Combinational block:
// checked 1 ns after each change.
module tb_polar_rep;
  localparam int unsigned LEN = 8;
  localparam int unsigned Q   = 5;

  logic [LEN-1:0][Q-1:0] alpha;
  logic [LEN-1:0]        beta;
  int checks = 0, failures = 0, n_one = 0, n_zero = 0;

  polar_rep #(.LEN(LEN), .Q(Q)) dut (.alpha, .beta);

  initial begin
    alpha = '0;
    for (int t = 0; t < 3000; t++) begin
      automatic int s = 0;
      automatic int bias = int'($urandom_range(6, 0)) - 3;
      for (int i = 0; i < LEN; i++) begin
        automatic int a = int'($urandom_range(14, 0)) - 7 + bias * 2;
        if (a > 15) a = 15;
        if (a < -15) a = -15;
        alpha[i] = Q'(a);
        s += a;
      end
      #1;
      if (s < 0) n_one++; else n_zero++;
      checks++;
      if (beta !== ((s < 0) ? {LEN{1'b1}} : {LEN{1'b0}})) begin
        failures++;
        if (failures < 10) $display("FAIL rep sum %0d -> %b", s, beta);
      end
    end
    checks++; if (n_one == 0 || n_zero == 0) begin failures++; $display("FAIL one decision never seen"); end
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
