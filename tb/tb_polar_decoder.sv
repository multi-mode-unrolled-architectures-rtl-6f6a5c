// tb_polar_decoder -- end-to-end test of polar_decoder at reduced sizes.
//
// Decoder A is the (16, 12) example decoder with initiation interval 2 and
// four modes: the master code, the (8, 4) code under it, and the (4, 1)
// Repetition and (4, 3) SPC codes under that.  Its expected latencies are
// 9, 6, 2 and 2 cycles (9 is the cycle count of the (16, 12) pipeline
// diagram).  Decoder B is a (64, 40) code with initiation interval 3, the
// register chains built as circular buffers, and five modes.  Both are driven
// by tb_dec_driver, which checks every codeword against a software reference,
// the latencies, and that each mechanism (mode switch, several frames in
// flight, full-rate entry, back-pressure, non-zero start phase, correction)
// happened.
module tb_polar_decoder;
  import polar_pkg::*;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  // ------------------------------------------------------------ decoder A
  localparam int unsigned N_A = 16;
  localparam logic [N_A-1:0] INFO_A = 16'hFFE8;   // u0, u1, u2, u4 frozen
  localparam mode_tab_t OFF_A = '{0, 0, 0, 4, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};
  localparam mode_tab_t LEN_A = '{16, 8, 4, 4, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};
  localparam mode_tab_t LAT_A = '{9, 6, 2, 2, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};

  logic                  a_in_valid, a_in_ready, a_out_valid;
  logic [1:0]            a_in_mode, a_out_mode;
  logic [N_A-1:0][3:0]   a_in_llr;
  logic [N_A-1:0]        a_out_cw;
  int                    a_checks, a_failures;
  bit                    a_finished;

  polar_decoder #(
    .N(N_A), .INFO(INFO_A), .II(2), .QC(4), .QI(5), .REP_MAX(8), .SPC_MAX(4),
    .NUM_MODES(4), .MODE_OFF(OFF_A), .MODE_LEN(LEN_A), .USE_MEM(1'b0)
  ) dut_a (
    .clk, .rst_n, .in_valid(a_in_valid), .in_ready(a_in_ready), .in_mode(a_in_mode),
    .in_llr(a_in_llr), .out_valid(a_out_valid), .out_mode(a_out_mode), .out_cw(a_out_cw)
  );

  tb_dec_driver #(
    .N(N_A), .INFO(INFO_A), .II(2), .QC(4), .QI(5), .REP_MAX(8), .SPC_MAX(4),
    .NUM_MODES(4), .MODE_OFF(OFF_A), .MODE_LEN(LEN_A), .EXP_LAT(LAT_A), .NFRAMES(120)
  ) drv_a (
    .clk, .rst_n, .in_valid(a_in_valid), .in_ready(a_in_ready), .in_mode(a_in_mode),
    .in_llr(a_in_llr), .out_valid(a_out_valid), .out_mode(a_out_mode), .out_cw(a_out_cw),
    .inject(dut_a.inject), .checks(a_checks), .failures(a_failures), .finished(a_finished)
  );

  // ------------------------------------------------------------ decoder B
  localparam int unsigned N_B = 64;
  localparam logic [N_B-1:0] INFO_B = 64'hffffffe8fee0c000;
  localparam mode_tab_t OFF_B = '{0, 0, 32, 16, 8, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};
  localparam mode_tab_t LEN_B = '{64, 32, 32, 16, 8, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};
  localparam mode_tab_t LAT_B = '{30, 16, 12, 10, 3, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};

  logic                  b_in_valid, b_in_ready, b_out_valid;
  logic [2:0]            b_in_mode, b_out_mode;
  logic [N_B-1:0][3:0]   b_in_llr;
  logic [N_B-1:0]        b_out_cw;
  int                    b_checks, b_failures;
  bit                    b_finished;

  polar_decoder #(
    .N(N_B), .INFO(INFO_B), .II(3), .QC(4), .QI(5), .REP_MAX(8), .SPC_MAX(4),
    .NUM_MODES(5), .MODE_OFF(OFF_B), .MODE_LEN(LEN_B), .USE_MEM(1'b1)
  ) dut_b (
    .clk, .rst_n, .in_valid(b_in_valid), .in_ready(b_in_ready), .in_mode(b_in_mode),
    .in_llr(b_in_llr), .out_valid(b_out_valid), .out_mode(b_out_mode), .out_cw(b_out_cw)
  );

  tb_dec_driver #(
    .N(N_B), .INFO(INFO_B), .II(3), .QC(4), .QI(5), .REP_MAX(8), .SPC_MAX(4),
    .NUM_MODES(5), .MODE_OFF(OFF_B), .MODE_LEN(LEN_B), .EXP_LAT(LAT_B), .NFRAMES(150)
  ) drv_b (
    .clk, .rst_n, .in_valid(b_in_valid), .in_ready(b_in_ready), .in_mode(b_in_mode),
    .in_llr(b_in_llr), .out_valid(b_out_valid), .out_mode(b_out_mode), .out_cw(b_out_cw),
    .inject(dut_b.inject), .checks(b_checks), .failures(b_failures), .finished(b_finished)
  );

  // ------------------------------------------------------------ control
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (a_finished && b_finished);
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", a_checks + b_checks, a_failures + b_failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", a_checks + b_checks, a_failures + b_failures + 1);
    $finish;
  end
endmodule
