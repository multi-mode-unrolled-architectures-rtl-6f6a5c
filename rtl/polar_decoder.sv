// polar_decoder -- multi-mode, fully-unrolled, partially-pipelined Fast-SSC
// polar decoder (top level).
//
// One unrolled decoder for a master polar code of length N also contains
// unrolled decoders for all its constituent codes.  This top level wraps the
// recursive polar_node tree of the master code with the pieces that make it a
// multi-mode decoder:
//   * an input buffer holding one extra frame (channel LLRs and mode), so that
//     the next frame can be loaded while others are decoded;
//   * the master code's channel-LLR register alpha_c (QC-bit LLRs, loaded on
//     phase 0, stage 0);
//   * polar_ctrl: phase enables for initiation interval II, the i_start and
//     latency tables, done generation and mode selection;
//   * the output register beta_c, which keeps the last estimated codeword
//     until the next one is done.
// In mode m the frame's LLRs are applied at in_llr positions
// [MODE_OFF[m], MODE_OFF[m] + MODE_LEN[m]) and the estimated codeword is read
// at the same positions of out_cw; the other bits of out_cw are zero.
//
// Default configuration (the paper's eight-mode decoder): the (1024, 853)
// master code, II = 20, 4-bit channel and 5-bit internal LLRs, Repetition
// nodes up to 8 and SPC nodes up to 4 LLRs.  Modes: 0 (1024,853), 1 (512,363),
// 2 (512,490), 3 (256,135), 4 (256,228), 5 (128,39), 6 (128,96), 7 (128,108).
// The frozen-bit set itself is not published; polar_pkg explains how the one
// used here was built.
//
// Handshake: a frame is taken when in_valid && in_ready.  A frame enters the
// pipeline when the phase counter reaches its mode's i_start (mod II); a
// frame of another mode first waits for the pipeline to drain.  out_valid is
// a one-cycle pulse: out_cw and out_mode then hold the new codeword, and keep
// it until the next pulse.  Latency from entering the pipeline to out_valid is
// node_lat + 1 cycles (323 for the master code); frames of one mode can enter
// every II cycles, giving N*f/II coded bits per second for the master code.
module polar_decoder
  import polar_pkg::*;
#(
  parameter int unsigned  N         = N_DEF,
  parameter logic [N-1:0] INFO      = INFO_1024_853,
  parameter int unsigned  II        = II_DEF,
  parameter int unsigned  QC        = Q_C_DEF,
  parameter int unsigned  QI        = Q_I_DEF,
  parameter int unsigned  REP_MAX   = REP_MAX_DEF,
  parameter int unsigned  SPC_MAX   = SPC_MAX_DEF,
  parameter int unsigned  NUM_MODES = NUM_MODES_DEF,
  parameter mode_tab_t    MODE_OFF  = MODE_OFF_DEF,
  parameter mode_tab_t    MODE_LEN  = MODE_LEN_DEF,
  parameter bit           USE_MEM   = 1'b0,
  parameter int unsigned  MW        = (NUM_MODES > 1) ? $clog2(NUM_MODES) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [MW-1:0]        in_mode,
  input  logic [N-1:0][QC-1:0] in_llr,
  output logic                 out_valid,
  output logic [MW-1:0]        out_mode,
  output logic [N-1:0]         out_cw
);
  // ----------------------------------------------- look-up table contents
  typedef logic [N-1:0] vec_t;

  function automatic mode_tab_t start_tab();
    mode_tab_t t = '{default: 0};
    for (int unsigned m = 0; m < NUM_MODES; m++)
      t[m] = node_start(NMAX'(INFO), N, MODE_OFF[m], MODE_LEN[m], REP_MAX, SPC_MAX);
    return t;
  endfunction

  function automatic mode_tab_t lat_tab();
    mode_tab_t t = '{default: 0};
    for (int unsigned m = 0; m < NUM_MODES; m++)
      t[m] = node_lat(NMAX'(INFO) >> MODE_OFF[m], MODE_LEN[m], REP_MAX, SPC_MAX);
    return t;
  endfunction

  function automatic int unsigned qdepth(mode_tab_t lat);
    int unsigned d = 1;
    for (int unsigned m = 0; m < NUM_MODES; m++)
      if (lat[m] / II + 1 > d) d = lat[m] / II + 1;
    return d;
  endfunction

  localparam mode_tab_t   MODE_START = start_tab();
  localparam mode_tab_t   MODE_LAT   = lat_tab();
  localparam int unsigned QDEPTH     = qdepth(MODE_LAT);

  // ------------------------------------------------------ input buffer
  logic                 buf_valid;
  logic [MW-1:0]        buf_mode;
  logic [N-1:0][QC-1:0] buf_llr;
  logic                 inject;

  assign in_ready = !buf_valid || inject;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      buf_valid <= 1'b0;
    end else if (in_valid && in_ready) begin
      buf_valid <= 1'b1;
    end else if (inject) begin
      buf_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      buf_mode <= in_mode;
      buf_llr  <= in_llr;
    end
  end

  // --------------------------------------------------------- controller
  logic [II-1:0]        en;
  logic [NUM_MODES-1:0] mode_sel;
  logic [MW-1:0]        cur_mode;
  logic                 out_en;
  logic [MW-1:0]        done_mode;
  logic                 busy;

  polar_ctrl #(
    .II(II), .NUM_MODES(NUM_MODES), .MODE_START(MODE_START), .MODE_LAT(MODE_LAT),
    .QDEPTH(QDEPTH), .MW(MW)
  ) u_ctrl (
    .clk, .rst_n, .buf_valid, .buf_mode, .inject, .en, .mode_sel, .cur_mode,
    .out_en, .out_mode(done_mode), .busy
  );

  // ---------------------------------------- master channel-LLR register
  logic [N-1:0][QC-1:0] alpha_c;
  always_ff @(posedge clk) if (en[0]) alpha_c <= buf_llr;

  // ------------------------------------------------------ decoder tree
  logic [N-1:0] root_beta;
  logic [N-1:0] root_tap;

  polar_node #(
    .LEN(N), .OFF(0), .INFO(INFO), .T0(0), .II(II), .QIN(QC), .QI(QI), .QC(QC),
    .REP_MAX(REP_MAX), .SPC_MAX(SPC_MAX), .NUM_MODES(NUM_MODES),
    .MODE_OFF(MODE_OFF), .MODE_LEN(MODE_LEN), .USE_MEM(USE_MEM)
  ) u_root (
    .clk, .en, .mode_sel, .alpha(alpha_c), .chan(buf_llr), .beta_q(root_beta), .tap(root_tap)
  );

  // ------------------------------------------- output register (beta_c)
  logic [N-1:0] mode_mask;
  always_comb begin
    mode_mask = '0;
    for (int unsigned m = 0; m < NUM_MODES; m++)
      if (mode_sel[m]) mode_mask = ((vec_t'(1) << MODE_LEN[m]) - 1'b1) << MODE_OFF[m];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else begin
      out_valid <= out_en;
    end
  end

  always_ff @(posedge clk) begin
    if (out_en) begin
      out_cw   <= root_tap & mode_mask;
      out_mode <= done_mode;
    end
  end

  // A codeword is only ever done in the mode the pipeline is running.
  a_done_in_mode: assert property (@(posedge clk) disable iff (!rst_n)
                                   out_en |-> (busy && done_mode == cur_mode));

  // The master code's own output register is beta_c; root_beta is unused.
  logic unused_root;
  assign unused_root = ^root_beta;
endmodule
