// tb_polar_node -- self-checking test of polar_node, the recursive unrolled
// decoder tree, on the (16, 12) example code (u0, u1, u2, u4 frozen) with
// initiation interval 2 and the modes (16,12), (8,5), (4,1) and (4,3).
//
// The testbench plays the controller: en is one-hot of (cycle mod 2) and a
// new frame's LLRs are applied right after an edge with en[0] high (stage 0).
// Mode 0: beta_q must change to the reference Fast-SSC estimate exactly 8
// edges later (8 pipeline stages for this code, 9 cycles with the input
// load) and must still hold the previous frame's estimate one edge before;
// tap must carry the same estimate combinationally in the cycle before it is
// registered.  Mode 3 (the (4,3) SPC code at leaves 4..7): the channel LLRs
// are fed in through chan, and tap[7:4] must be the SPC estimate of them 2
// edges later.
module tb_polar_node;
  import polar_pkg::*;
  import polar_ref_pkg::*;

  localparam int unsigned LEN = 16;
  localparam logic [LEN-1:0] INFO = 16'hFFE8;
  localparam mode_tab_t OFF = '{0, 0, 0, 4, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};
  localparam mode_tab_t LN  = '{16, 8, 4, 4, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};

  logic clk = 0;
  always #5 clk = ~clk;

  logic [1:0]             en;
  logic [3:0]             mode_sel;
  logic [LEN-1:0][3:0]    alpha, chan;
  logic [LEN-1:0]         beta_q, tap;
  int checks = 0, failures = 0;
  int cyc = 0;
  barr_t info_b;

  polar_node #(
    .LEN(LEN), .OFF(0), .INFO(INFO), .T0(0), .II(2), .QIN(4), .QI(5), .QC(4),
    .REP_MAX(8), .SPC_MAX(4), .NUM_MODES(4), .MODE_OFF(OFF), .MODE_LEN(LN), .USE_MEM(1'b0)
  ) dut (.clk, .en, .mode_sel, .alpha, .chan, .beta_q, .tap);

  always @(posedge clk) cyc <= cyc + 1;
  assign en = (cyc % 2 == 0) ? 2'b01 : 2'b10;

  function automatic void fail(string s);
    failures++;
    if (failures < 10) $display("FAIL %s", s);
  endfunction

  initial begin
    logic [LEN-1:0] prev = '0;
    info_b = new[LEN];
    for (int i = 0; i < LEN; i++) info_b[i] = INFO[i];
    mode_sel = 4'b0001;
    alpha = '0; chan = '0;
    // Flush the pipeline with all-zero LLRs first.
    repeat (40) @(posedge clk);
    for (int f = 0; f < 60; f++) begin
      automatic iarr_t a = new[LEN];
      automatic barr_t r;
      automatic logic [LEN-1:0] e;
      @(posedge clk iff en[0]);   // the frame's stage-0 edge
      #1;
      for (int i = 0; i < LEN; i++) begin
        a[i] = int'($urandom_range(14, 0)) - 7;
        alpha[i] = 4'(a[i]);
      end
      chan = alpha;
      r = decode(a, info_b, 0, LEN, 5, 8, 4);
      for (int i = 0; i < LEN; i++) e[i] = r[i];
      repeat (7) @(posedge clk);
      #1;
      checks++; if (tap !== e) fail($sformatf("tap %h, expected %h", tap, e));
      checks++; if (beta_q !== prev) fail("beta_q changed before stage 8");
      @(posedge clk);
      #1;
      checks++; if (beta_q !== e) fail($sformatf("beta_q %h, expected %h (frame %0d)", beta_q, e, f));
      prev = e;
      repeat (4) @(posedge clk);
    end
    // Mode 3: the (4,3) SPC code at leaves 4..7, fed through chan.
    mode_sel = 4'b1000;
    for (int f = 0; f < 40; f++) begin
      automatic iarr_t a = new[LEN];
      automatic barr_t r;
      automatic logic [3:0] e;
      @(posedge clk iff en[0]);
      #1;
      for (int i = 0; i < LEN; i++) begin
        a[i] = int'($urandom_range(14, 0)) - 7;
        chan[i] = 4'(a[i]);
        alpha[i] = 4'($urandom);
      end
      begin
        automatic iarr_t sub = new[4];
        for (int i = 0; i < 4; i++) sub[i] = a[4 + i];   // LLRs relative to the node
        r = decode(sub, info_b, 4, 4, 5, 8, 4);
      end
      for (int i = 0; i < 4; i++) e[i] = r[i];
      repeat (4) @(posedge clk);   // stage 4: the SPC node's LLR register loads chan
      #1;
      checks++; if (tap[7:4] !== e) fail($sformatf("mode 3 tap %b, expected %b", tap[7:4], e));
      repeat (2) @(posedge clk);
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
