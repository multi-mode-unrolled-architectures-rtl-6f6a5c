// polar_ctrl -- controller of the multi-mode unrolled polar decoder.
//
// Phase counter and enables.  A counter runs through 0 .. II-1 and drives the
// one-hot enable vector en; a pipeline register loaded at stage s uses
// en[s mod II].  A frame therefore enters the decoder at most once every II
// cycles (the initiation interval).
//
// Modes and the two look-up tables.  Mode m decodes the constituent code whose
// LLR register sits at stage MODE_START[m] of the master pipeline (its
// i_start) and whose estimate is ready MODE_LAT[m] stages later.  A frame of
// the current mode enters ("inject") in a cycle whose phase equals
// MODE_START[m] mod II, so no cycles are lost for codes that do not start on
// phase 0.  The second table gives the stopping point: the output register is
// loaded MODE_LAT[m] cycles after the frame entered, and done (out_en) is
// raised in that cycle.  Frames in flight are kept in a small queue of due
// times, so several frames of one mode can be in the pipeline together.
//
// Mode switch.  mode_sel (one-hot) steers the decoder's input multiplexers
// and output routing for every frame in flight, so a frame of another mode
// waits until the pipeline is empty; the controller then changes mode and
// restarts the phase counter at the new mode's MODE_START mod II, and the
// frame enters in the next cycle.  The paper says the controller produces the
// multiplexer selects from the selected mode but not how modes are switched
// between frames; draining the pipeline first is this design's choice.
//
// Interface: buf_valid/buf_mode describe the frame waiting in the decoder's
// input buffer; inject is high in the cycle that frame is loaded into the
// pipeline (the buffer is freed at that edge).  out_en/out_mode tell the
// decoder to load its output register with the estimate of that mode.
// Synchronous active-low reset; after reset the mode is 0 (the master code).
module polar_ctrl
  import polar_pkg::*;
#(
  parameter int unsigned II         = II_DEF,
  parameter int unsigned NUM_MODES  = NUM_MODES_DEF,
  parameter mode_tab_t   MODE_START = '{0, 1, 227, 2, 140, 3, 57, 229, 0, 0, 0, 0, 0, 0, 0, 0},
  parameter mode_tab_t   MODE_LAT   = '{322, 225, 94, 137, 85, 53, 81, 53, 0, 0, 0, 0, 0, 0, 0, 0},
  parameter int unsigned QDEPTH     = 18,
  parameter int unsigned MW         = (NUM_MODES > 1) ? $clog2(NUM_MODES) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 buf_valid,
  input  logic [MW-1:0]        buf_mode,
  output logic                 inject,
  output logic [II-1:0]        en,
  output logic [NUM_MODES-1:0] mode_sel,
  output logic [MW-1:0]        cur_mode,
  output logic                 out_en,
  output logic [MW-1:0]        out_mode,
  output logic                 busy
);
  localparam int unsigned PW = (II > 1) ? $clog2(II) : 1;
  localparam int unsigned CW = 16;            // cycle stamp width (latencies < 2^16)
  localparam int unsigned QW = $clog2(QDEPTH + 1);
  localparam int unsigned AW = (QDEPTH > 1) ? $clog2(QDEPTH) : 1;

  typedef logic [PW-1:0] phase_t;

  logic [PW-1:0] phase;
  logic [CW-1:0] cyc;
  logic [CW-1:0] due [QDEPTH];
  logic [AW-1:0] head, tail;
  logic [QW-1:0] count;
  logic          switch_mode;

  function automatic phase_t start_phase(logic [MW-1:0] m);
    return phase_t'(MODE_START[32'(m)] % II);
  endfunction

  assign busy        = (count != '0);
  assign switch_mode = buf_valid && (buf_mode != cur_mode) && !busy;
  assign inject      = buf_valid && (buf_mode == cur_mode) && (phase == start_phase(cur_mode));
  assign out_en      = busy && (due[head] == cyc);
  assign out_mode    = cur_mode;

  always_comb begin
    en = '0;
    en[phase] = 1'b1;
    mode_sel = '0;
    mode_sel[cur_mode] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase    <= start_phase('0);
      cur_mode <= '0;
      cyc      <= '0;
      head     <= '0;
      tail     <= '0;
      count    <= '0;
    end else begin
      cyc <= cyc + 1'b1;
      if (switch_mode) begin
        cur_mode <= buf_mode;
        phase    <= start_phase(buf_mode);
      end else begin
        phase <= (32'(phase) == II - 1) ? '0 : phase + 1'b1;
      end
      if (inject) begin
        due[tail] <= cyc + CW'(MODE_LAT[32'(cur_mode)]);
        tail      <= (32'(tail) == QDEPTH - 1) ? '0 : tail + 1'b1;
      end
      if (out_en) head <= (32'(head) == QDEPTH - 1) ? '0 : head + 1'b1;
      count <= count + QW'(inject) - QW'(out_en);
    end
  end

  // The queue never overflows when QDEPTH >= MODE_LAT / II + 1.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(inject && !out_en && 32'(count) == QDEPTH));
  a_inject_phase: assert property (@(posedge clk) disable iff (!rst_n)
                                   inject |-> en[start_phase(cur_mode)]);
endmodule
