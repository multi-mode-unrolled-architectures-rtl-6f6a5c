// tb_polar_ctrl -- self-checking test of polar_ctrl.
//
// A small controller: II = 4 and three modes with start stages 0, 5 and 9
// and latencies 12, 3 and 6.  The testbench models the decoder's one-frame
// input buffer, fills it with frames in bursts of random modes, and checks:
// en is one-hot; a frame enters only when en[start mod II] is high, only in
// the current mode, and never less than II cycles after the previous one;
// the mode changes only when no frame is in flight; out_en comes exactly
// MODE_LAT cycles after each entry, in order, with the right out_mode.
// Mode switches, back-to-back entries and several frames in flight must all
// occur.
module tb_polar_ctrl;
  import polar_pkg::*;

  localparam int unsigned II = 4;
  localparam mode_tab_t ST  = '{0, 5, 9, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};
  localparam mode_tab_t LT  = '{12, 3, 6, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};

  logic clk = 0;
  always #5 clk = ~clk;

  logic         rst_n = 0;
  logic         buf_valid;
  logic [1:0]   buf_mode, cur_mode, out_mode;
  logic         inject, out_en, busy;
  logic [II-1:0] en;
  logic [2:0]   mode_sel;
  int checks = 0, failures = 0, cyc = 0;
  int n_switch = 0, n_b2b = 0, n_multi = 0, last_inj = -100;
  int dueq[$], modeq[$];

  polar_ctrl #(.II(II), .NUM_MODES(3), .MODE_START(ST), .MODE_LAT(LT), .QDEPTH(4)) dut (
    .clk, .rst_n, .buf_valid, .buf_mode, .inject, .en, .mode_sel, .cur_mode,
    .out_en, .out_mode, .busy
  );

  function automatic void fail(string s);
    failures++;
    if (failures < 10) $display("FAIL %s (cycle %0d)", s, cyc);
  endfunction

  // Input buffer model: refilled with a new frame after each entry.
  int burst_left = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      buf_valid <= 0;
      buf_mode  <= 0;
    end else begin
      if (inject || !buf_valid) begin
        if ($urandom_range(3, 0) != 0) begin
          buf_valid <= 1;
          if (burst_left == 0) begin
            buf_mode   <= 2'($urandom_range(2, 0));
            burst_left = int'($urandom_range(4, 1));
          end
          burst_left--;
        end else begin
          buf_valid <= 0;
        end
      end
    end
  end

  // Checker, sampled just before each rising edge.
  logic [1:0] seen_mode = '0;
  always @(negedge clk) if (rst_n) begin
    // busy counts the frames already in the pipeline.
    checks++; if (busy != (dueq.size() != 0)) fail("busy wrong");
    if (cur_mode != seen_mode) begin
      n_switch++;
      checks++; if (dueq.size() != 0) fail("mode changed with frames in flight");
    end
    seen_mode = cur_mode;
    checks++; if (!$onehot(en)) fail("en not one-hot");
    checks++; if (mode_sel != (3'b1 << cur_mode)) fail("mode_sel does not match cur_mode");
    if (inject) begin
      checks++; if (!en[ST[cur_mode] % II]) fail("entry on the wrong phase");
      checks++; if (buf_mode != cur_mode) fail("entry of a frame of another mode");
      checks++; if (cyc - last_inj < int'(II)) fail("entries less than II apart");
      if (cyc - last_inj == int'(II)) n_b2b++;
      last_inj = cyc;
      dueq.push_back(cyc + int'(LT[cur_mode]));
      modeq.push_back(int'(cur_mode));
      if (dueq.size() >= 2) n_multi++;
    end
    if (out_en) begin
      checks++;
      if (dueq.size() == 0) fail("out_en with no frame in flight");
      else begin
        if (dueq[0] != cyc) fail($sformatf("out_en at %0d, expected %0d", cyc, dueq[0]));
        checks++; if (int'(out_mode) != modeq[0]) fail("wrong out_mode");
        void'(dueq.pop_front());
        void'(modeq.pop_front());
      end
    end else if (dueq.size() > 0) begin
      checks++; if (dueq[0] <= cyc) fail("missing out_en");
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    checks++; if (n_switch == 0) fail("no mode switch");
    checks++; if (n_b2b == 0) fail("no back-to-back entries");
    checks++; if (n_multi == 0) fail("never two frames in flight");
    $display("switches=%0d back_to_back=%0d multi=%0d", n_switch, n_b2b, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
