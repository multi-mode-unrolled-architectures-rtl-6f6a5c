// tb_polar_g -- self-checking test of polar_g (the G function).
//
// Random LLR pairs and partial-sum bits are applied to a 16-LLR instance with
// 5-bit inputs and outputs, so sums beyond the output range are saturated.
// Expected value per lane, worked out here with plain integers:
// b + (1 - 2*beta_l)*a, limited to +-(2^(QO-1)-1).  Combinational block:
// checked 1 ns after each input change.
module tb_polar_g;
  localparam int unsigned HALF = 8;
  localparam int unsigned QIN  = 5;
  localparam int unsigned QO   = 5;

  logic [2*HALF-1:0][QIN-1:0] alpha;
  logic [HALF-1:0]            beta_l;
  logic [HALF-1:0][QO-1:0]    alpha_r;
  int checks = 0, failures = 0, n_sat = 0;

  polar_g #(.HALF(HALF), .QIN(QIN), .QO(QO)) dut (.alpha, .beta_l, .alpha_r);

  initial begin
    alpha = '0; beta_l = '0;
    for (int t = 0; t < 2000; t++) begin
      automatic int a [2*HALF];
      for (int i = 0; i < 2 * HALF; i++) begin
        a[i] = int'($urandom_range(30, 0)) - 15;
        alpha[i] = QIN'(a[i]);
      end
      beta_l = HALF'($urandom);
      #1;
      for (int i = 0; i < HALF; i++) begin
        automatic int e = a[i+HALF] + (beta_l[i] ? -a[i] : a[i]);
        if (e > 15 || e < -15) n_sat++;
        if (e > 15) e = 15;
        if (e < -15) e = -15;
        checks++;
        if (int'($signed(alpha_r[i])) != e) begin
          failures++;
          if (failures < 10) $display("FAIL g(%0d,%0d,%0b) = %0d, expected %0d",
                                      a[i], a[i+HALF], beta_l[i], $signed(alpha_r[i]), e);
        end
      end
    end
    checks++; if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
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
