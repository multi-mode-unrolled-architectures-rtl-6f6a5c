// tb_polar_delay -- self-checking test of polar_delay.
//
// Three instances: a 3-register chain, a 5-word circular buffer (USE_MEM)
// and the depth-0 wire.  The enable is random.  The testbench keeps its own
// history of the values written on enabled edges and checks, after every
// edge, that q is the value written DEPTH enabled edges earlier (once DEPTH
// values have been written), and that the wire passes d through.
module tb_polar_delay;
  localparam int unsigned W = 8;

  logic clk = 0;
  always #5 clk = ~clk;

  logic         en;
  logic [W-1:0] d, q3, q5, q0;
  int checks = 0, failures = 0;
  logic [W-1:0] hist[$];

  polar_delay #(.W(W), .DEPTH(3), .USE_MEM(1'b0)) u_reg (.clk, .en, .d, .q(q3));
  polar_delay #(.W(W), .DEPTH(5), .USE_MEM(1'b1)) u_mem (.clk, .en, .d, .q(q5));
  polar_delay #(.W(W), .DEPTH(0), .USE_MEM(1'b0)) u_wire (.clk, .en, .d, .q(q0));

  initial begin
    en = 0; d = '0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      en = ($urandom_range(2, 0) != 0);
      d  = W'($urandom);
      #1;
      checks++; if (q0 !== d) begin failures++; $display("FAIL wire"); end
      @(posedge clk);
      if (en) hist.push_back(d);
      #1;
      if (hist.size() >= 3) begin
        checks++;
        if (q3 !== hist[hist.size() - 3]) begin
          failures++;
          if (failures < 10) $display("FAIL register chain %h, expected %h", q3, hist[hist.size() - 3]);
        end
      end
      if (hist.size() >= 5) begin
        checks++;
        if (q5 !== hist[hist.size() - 5]) begin
          failures++;
          if (failures < 10) $display("FAIL circular buffer %h, expected %h", q5, hist[hist.size() - 5]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
