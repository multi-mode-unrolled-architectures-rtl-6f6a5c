// tb_dec_driver -- stimulus and scoreboard for polar_decoder.
//
// Sends NFRAMES frames in bursts of the same mode, cycling through all modes
// (so the pipeline is refilled and the mode is switched many times), with
// random idle gaps (sometimes none, so the input buffer fills and in_ready
// drops).  Each frame carries a random codeword of its constituent code,
// BPSK-mapped with or without noise, at the mode's leaf positions of in_llr;
// the other positions carry random values that must be ignored.
//
// Checks per frame: the output mode; the output codeword against the
// software Fast-SSC reference (polar_ref_pkg) and, for noiseless frames,
// against the transmitted codeword; zeros outside the mode's positions; the
// latency from pipeline entry (inject) to out_valid against EXP_LAT.  Also
// checks that frames never enter less than II cycles apart.  Mechanisms that
// must occur at least once (otherwise a failure is counted): every mode used,
// a mode switch, two or more frames in flight, back-to-back entries exactly II
// cycles apart, back-pressure (in_valid with in_ready low), a frame entering
// on a non-zero phase (i_start mod II != 0), and an SPC or Repetition
// correction (noisy frame whose hard decisions differ from the output).
module tb_dec_driver
  import polar_pkg::*;
  import polar_ref_pkg::*;
#(
  parameter int unsigned  N         = 16,
  parameter logic [N-1:0] INFO      = '1,
  parameter int unsigned  II        = 2,
  parameter int unsigned  QC        = 4,
  parameter int unsigned  QI        = 5,
  parameter int unsigned  REP_MAX   = 8,
  parameter int unsigned  SPC_MAX   = 4,
  parameter int unsigned  NUM_MODES = 1,
  parameter mode_tab_t    MODE_OFF  = '{default: 0},
  parameter mode_tab_t    MODE_LEN  = '{default: 0},
  parameter mode_tab_t    EXP_LAT   = '{default: 0},
  parameter int unsigned  NFRAMES   = 40,
  parameter int unsigned  BURST     = 3,
  parameter int unsigned  MW        = (NUM_MODES > 1) ? $clog2(NUM_MODES) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic                 in_valid,
  input  logic                 in_ready,
  output logic [MW-1:0]        in_mode,
  output logic [N-1:0][QC-1:0] in_llr,
  input  logic                 out_valid,
  input  logic [MW-1:0]        out_mode,
  input  logic [N-1:0]         out_cw,
  input  logic                 inject,
  output int                   checks,
  output int                   failures,
  output bit                   finished
);
  typedef struct {
    int unsigned  mode;
    logic [N-1:0] cw;       // reference decoder output, at the mode's positions
    logic [N-1:0] tx;       // transmitted codeword
    logic [N-1:0] hard;     // hard decisions of the channel LLRs
    bit           noisy;
  } exp_t;

  exp_t        expq[$];
  longint      injq[$];
  longint      cyc = 0;
  longint      last_inj = -1;
  int unsigned inflight = 0;
  int unsigned received = 0;
  // mechanism counters
  int n_mode [NUM_MODES];
  int n_switch = 0, n_multi = 0, n_fullrate = 0, n_stall = 0, n_phase = 0, n_corr = 0;
  int unsigned last_out_mode = 0;
  bit          have_out = 0;

  barr_t info_b;

  function automatic void fail(string what);
    failures++;
    if (failures < 20) $display("FAIL %s (cycle %0d)", what, cyc);
  endfunction

  initial begin
    checks = 0; failures = 0; finished = 0;
    info_b = new[N];
    for (int i = 0; i < N; i++) info_b[i] = INFO[i];
    foreach (n_mode[m]) n_mode[m] = 0;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // ------------------------------------------------------------- producer
  initial begin
    in_valid = 0;
    in_mode  = '0;
    in_llr   = '0;
    @(negedge clk iff rst_n);
    for (int unsigned f = 0; f < NFRAMES; f++) begin
      automatic int unsigned m   = (f / BURST) % NUM_MODES;
      automatic int unsigned off = MODE_OFF[m];
      automatic int unsigned len = MODE_LEN[m];
      automatic bit          noisy = (f % 2 == 1);
      automatic barr_t       u = new[len];
      automatic barr_t       x, dec;
      automatic iarr_t       a = new[len];
      automatic exp_t        e;
      for (int i = 0; i < len; i++) u[i] = info_b[off + i] ? 1'($urandom) : 1'b0;
      x = encode(u);
      e.mode = m; e.cw = '0; e.tx = '0; e.hard = '0; e.noisy = noisy;
      for (int i = 0; i < N; i++) in_llr[i] = QC'($urandom);
      for (int i = 0; i < len; i++) begin
        a[i] = chan_llr(x[i], 4, noisy ? 6 : 0, QC);
        in_llr[off + i] = QC'(a[i]);
        e.tx[off + i]   = x[i];
        e.hard[off + i] = (a[i] < 0);
      end
      dec = decode(a, info_b, off, len, QI, REP_MAX, SPC_MAX);
      for (int i = 0; i < len; i++) e.cw[off + i] = dec[i];
      expq.push_back(e);
      in_mode  = MW'(m);
      in_valid = 1;
      // in_ready is stable at the falling edge; the transfer happens at the
      // next rising edge.
      while (!in_ready) begin
        n_stall++;
        @(negedge clk);
      end
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(2, 0) * (f % 3 == 0 ? 1 : 0)) @(negedge clk);
    end
  end

  // ---------------------------------------------- pipeline entry monitor
  always @(posedge clk) begin
    if (rst_n && inject) begin
      injq.push_back(cyc);
      if (last_inj >= 0) begin
        checks++;
        if (cyc - last_inj < longint'(II)) fail("frames entered less than II cycles apart");
        if (cyc - last_inj == longint'(II)) n_fullrate++;
      end
      last_inj = cyc;
      inflight++;
      if (inflight >= 2) n_multi++;
    end
  end

  // ------------------------------------------------------------ scoreboard
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      automatic exp_t        e;
      automatic longint      t0;
      automatic int unsigned om = 32'(out_mode);
      automatic logic [N-1:0] msk;
      inflight--;
      if (expq.size() == 0 || injq.size() == 0) begin
        fail("unexpected output");
      end else begin
        e  = expq.pop_front();
        t0 = injq.pop_front();
        msk = '0;
        for (int i = 0; i < N; i++)
          msk[i] = (i >= int'(MODE_OFF[e.mode])) && (i < int'(MODE_OFF[e.mode] + MODE_LEN[e.mode]));
        checks++; if (om != e.mode) fail($sformatf("mode %0d, expected %0d", om, e.mode));
        checks++; if (out_cw !== e.cw) fail($sformatf("codeword mismatch in mode %0d", e.mode));
        checks++; if ((out_cw & ~msk) != '0) fail("bits outside the mode's positions");
        if (!e.noisy) begin
          checks++; if (out_cw !== e.tx) fail("noiseless frame not decoded to its codeword");
        end else if ((e.hard & msk) != e.cw) begin
          n_corr++;
        end
        checks++;
        if (cyc - t0 != longint'(EXP_LAT[e.mode]))
          fail($sformatf("latency %0d, expected %0d (mode %0d)", cyc - t0, EXP_LAT[e.mode], e.mode));
        if (MODE_START_PH(e.mode) != 0) n_phase++;
        n_mode[e.mode]++;
        if (have_out && last_out_mode != e.mode) n_switch++;
        last_out_mode = e.mode;
        have_out = 1;
      end
      received++;
      if (received == NFRAMES) begin
        foreach (n_mode[m]) begin
          checks++; if (n_mode[m] == 0) fail($sformatf("mode %0d never used", m));
        end
        checks++; if (n_switch == 0)   fail("no mode switch");
        checks++; if (n_multi == 0)    fail("never two frames in flight");
        checks++; if (n_fullrate == 0) fail("never back-to-back at the initiation interval");
        checks++; if (n_stall == 0)    fail("input never back-pressured");
        checks++; if (n_phase == 0)    fail("no frame entered on a non-zero phase");
        checks++; if (n_corr == 0)     fail("no frame needed a correction");
        $display("mechanisms: switches=%0d multi_in_flight=%0d full_rate=%0d stalls=%0d nonzero_phase=%0d corrections=%0d",
                 n_switch, n_multi, n_fullrate, n_stall, n_phase, n_corr);
        finished = 1;
      end
    end
  end

  function automatic int unsigned MODE_START_PH(int unsigned m);
    return node_start(NMAX'(INFO), N, MODE_OFF[m], MODE_LEN[m], REP_MAX, SPC_MAX) % II;
  endfunction
endmodule
