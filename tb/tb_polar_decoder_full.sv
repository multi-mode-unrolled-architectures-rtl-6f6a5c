// tb_polar_decoder_full -- polar_decoder at its default size: the eight-mode
// decoder of the (1024, 853) master code with initiation interval 20.
//
// The decoder is instantiated with every parameter at its default.  The
// driver sends 24 frames, three of each of the eight codes in turn, and
// checks each output codeword against the software Fast-SSC reference, and
// each latency (from pipeline entry to out_valid) against the decoding
// latencies of the eight codes: 323, 226, 95, 138, 86, 54, 82 and 54 cycles
// for (1024,853), (512,363), (512,490), (256,135), (256,228), (128,39),
// (128,96) and (128,108).  It also requires every mechanism of the decoder
// (mode switch, several frames in flight, entry every 20 cycles, input
// back-pressure, non-zero start phase, corrections) to occur.
module tb_polar_decoder_full;
  import polar_pkg::*;

  localparam int unsigned N  = N_DEF;
  localparam int unsigned MW = 3;
  localparam mode_tab_t   LAT = '{323, 226, 95, 138, 86, 54, 82, 54, 0, 0, 0, 0, 0, 0, 0, 0};

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic                      in_valid, in_ready, out_valid;
  logic [MW-1:0]             in_mode, out_mode;
  logic [N-1:0][Q_C_DEF-1:0] in_llr;
  logic [N-1:0]              out_cw;
  int                        checks, failures;
  bit                        finished;

  polar_decoder dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_mode, .in_llr, .out_valid, .out_mode, .out_cw
  );

  tb_dec_driver #(
    .N(N), .INFO(INFO_1024_853), .II(II_DEF), .QC(Q_C_DEF), .QI(Q_I_DEF),
    .REP_MAX(REP_MAX_DEF), .SPC_MAX(SPC_MAX_DEF), .NUM_MODES(NUM_MODES_DEF),
    .MODE_OFF(MODE_OFF_DEF), .MODE_LEN(MODE_LEN_DEF), .EXP_LAT(LAT), .NFRAMES(24), .BURST(3)
  ) drv (
    .clk, .rst_n, .in_valid, .in_ready, .in_mode, .in_llr, .out_valid, .out_mode, .out_cw,
    .inject(dut.inject), .checks, .failures, .finished
  );

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (finished);
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
