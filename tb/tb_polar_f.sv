// tb_polar_f -- self-checking test of polar_f (the F function, min-sum).
//
// Random LLR pairs in the symmetric range of the input width are applied to a
// 16-LLR instance whose output is one bit narrower than its input, so the
// output saturation is exercised too.  Expected value per lane, worked out
// here with plain integers: sign(a)*sign(b)*min(|a|, |b|, 2^(QO-1)-1).
// Combinational block: checked 1 ns after each input change.
module tb_polar_f;
  localparam int unsigned HALF = 8;
  localparam int unsigned QIN  = 5;
  localparam int unsigned QO   = 4;

  logic [2*HALF-1:0][QIN-1:0] alpha;
  logic [HALF-1:0][QO-1:0]    alpha_l;
  int checks = 0, failures = 0, n_sat = 0;

  polar_f #(.HALF(HALF), .QIN(QIN), .QO(QO)) dut (.alpha, .alpha_l);

  function automatic int rnd(int unsigned q);
    int lim = (1 <<< (q - 1)) - 1;
    return int'($urandom_range(2 * lim, 0)) - lim;
  endfunction

  initial begin
    alpha = '0;
    for (int t = 0; t < 2000; t++) begin
      automatic int a [2*HALF];
      for (int i = 0; i < 2 * HALF; i++) begin
        a[i] = rnd(QIN);
        alpha[i] = QIN'(a[i]);
      end
      #1;
      for (int i = 0; i < HALF; i++) begin
        automatic int x = a[i], y = a[i+HALF];
        automatic int m = (x < 0 ? -x : x) < (y < 0 ? -y : y) ? (x < 0 ? -x : x) : (y < 0 ? -y : y);
        automatic int e;
        if (m > 7) begin m = 7; n_sat++; end
        e = ((x < 0) != (y < 0)) ? -m : m;
        checks++;
        if (int'($signed(alpha_l[i])) != e) begin
          failures++;
          if (failures < 10) $display("FAIL f(%0d,%0d) = %0d, expected %0d", x, y, $signed(alpha_l[i]), e);
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
