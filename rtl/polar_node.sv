// polar_node -- one node of a fully-unrolled, partially-pipelined Fast-SSC
// polar decoder, built recursively.
//
// The node decodes the constituent code made of leaves u_OFF .. u_(OFF+LEN-1)
// of the master code, whose information positions are given by INFO (bit i =
// leaf OFF+i).  Its kind is found at elaboration time:
//   Rate-1 / Repetition / SPC -> one stage of hard decision, polar_rep or
//       polar_spc, then the output register;
//   generic (split) node      -> F, left child, G (G0R when the left child is
//       Rate-0, G merged with the hard decision when the right child is
//       Rate-1), right child, Combine (C0R, i.e. {beta_r, beta_r} as wiring,
//       when the left child is Rate-0).  Rate-0 children cost nothing.
// The children are further polar_node instances, so the whole decoder tree is
// laid out as hardware, as the paper describes.
//
// Timing.  The node's LLRs arrive in a register loaded at stage T0 (stage = the
// clock edge, counted from the edge that loads the master code's channel LLRs).
// Every register that is loaded at stage s uses the phase enable en[s mod II],
// as in the paper's partially-pipelined controller, so a frame moves one
// stage per enable and a new frame can enter every II cycles.  Values that
// must outlive II cycles are kept in polar_delay chains of ceil(L/II)-1 extra
// registers.  beta_q is registered at stage T0 + node_lat(...).
//
// Multi-mode routing (the paper's m1..m5 multiplexers and "&" joiners).  A
// child that is one of the decoder's modes gets a multiplexer in front of its
// LLR register: in that mode the register loads the channel LLRs of the
// child's own leaf positions, chan, sign-extended from QC to QI bits, instead
// of the F or G result.  The output of a mode node is taken from its last
// operation, before its register: tap carries, bit for bit over the node's
// leaf positions, the final combinational estimate of whichever mode node
// below this one is selected, or of this node itself otherwise.
//
// Ports: en (II phase enables, one-hot), mode_sel (one-hot mode), alpha
// (registered LLRs of QIN bits), chan (channel LLRs of this node's positions),
// beta_q (registered estimate), tap (estimate routed for the output register).
//
// Unused-signal warnings that stand: a node with no mode below it does not
// read its children's tap; a node whose children are not modes does not read
// chan (or reads only part of it); a node with no mode at or below it does
// not read mode_sel.  The ports are the same on every node of the recursion
// and the unread wires carry no logic.  When this module is linted on its own
// as the top, Verilator reports beta_l, beta_r, tap_l and tap_r of the top
// instance as undriven and al_q/ar_q as unused: it elaborates the outermost
// copy of a recursive module without its children.  The same tree inside
// polar_decoder lints without these warnings, and synthesis of this module
// alone builds the full tree.
module polar_node
  import polar_pkg::*;
#(
  parameter int unsigned    LEN       = N_DEF,
  parameter int unsigned    OFF       = 0,
  parameter logic [LEN-1:0] INFO      = INFO_1024_853,
  parameter int unsigned    T0        = 0,
  parameter int unsigned    II        = II_DEF,
  parameter int unsigned    QIN       = Q_C_DEF,
  parameter int unsigned    QI        = Q_I_DEF,
  parameter int unsigned    QC        = Q_C_DEF,
  parameter int unsigned    REP_MAX   = REP_MAX_DEF,
  parameter int unsigned    SPC_MAX   = SPC_MAX_DEF,
  parameter int unsigned    NUM_MODES = NUM_MODES_DEF,
  parameter mode_tab_t      MODE_OFF  = MODE_OFF_DEF,
  parameter mode_tab_t      MODE_LEN  = MODE_LEN_DEF,
  parameter bit             USE_MEM   = 1'b0
) (
  input  logic                     clk,
  input  logic [II-1:0]            en,
  input  logic [NUM_MODES-1:0]     mode_sel,
  input  logic [LEN-1:0][QIN-1:0]  alpha,
  input  logic [LEN-1:0][QC-1:0]   chan,
  output logic [LEN-1:0]           beta_q,
  output logic [LEN-1:0]           tap
);
  localparam node_kind_e KIND = node_kind(NMAX'(INFO), LEN, REP_MAX, SPC_MAX);
  localparam int unsigned T1  = T0 + 1;

  if (KIND == K_RATE0) begin : g_rate0
    // Only reachable when a whole (sub)code is frozen: the estimate is zero.
    assign beta_q = '0;
    assign tap    = '0;

  end else if (KIND != K_SPLIT) begin : g_leaf
    logic [LEN-1:0] bd;
    if (KIND == K_REP) begin : g_rep
      polar_rep #(.LEN(LEN), .Q(QIN)) u_rep (.alpha(alpha), .beta(bd));
    end else if (KIND == K_SPC) begin : g_spc
      polar_spc #(.LEN(LEN), .Q(QIN)) u_spc (.alpha(alpha), .beta(bd));
    end else begin : g_rate1
      // Rate-1: the estimate is the sign bit of each LLR.
      always_comb for (int unsigned i = 0; i < LEN; i++) bd[i] = alpha[i][QIN-1];
    end
    always_ff @(posedge clk) if (en[T1 % II]) beta_q <= bd;
    assign tap = bd;

  end else begin : g_split
    localparam int unsigned    H      = LEN / 2;
    localparam logic [H-1:0]   INFO_L = INFO[H-1:0];
    localparam logic [H-1:0]   INFO_R = INFO[LEN-1:H];
    localparam node_kind_e     KL     = node_kind(NMAX'(INFO_L), H, REP_MAX, SPC_MAX);
    localparam node_kind_e     KR     = node_kind(NMAX'(INFO_R), H, REP_MAX, SPC_MAX);
    localparam int unsigned    LATL   = node_lat(NMAX'(INFO_L), H, REP_MAX, SPC_MAX);
    localparam int unsigned    LATR   = node_lat(NMAX'(INFO_R), H, REP_MAX, SPC_MAX);
    // Stages: left estimate ready, G, right estimate ready, Combine.
    localparam int unsigned    TL     = (KL == K_RATE0) ? T0 : T1 + LATL;
    localparam int unsigned    TG     = TL + 1;
    localparam int unsigned    TR     = (KR == K_RATE0) ? TL : (KR == K_RATE1) ? TG : TG + LATR;
    localparam int unsigned    TC     = (KL == K_RATE0) ? TR : TR + 1;
    localparam int             ML     = mode_of(OFF, H, NUM_MODES, MODE_OFF, MODE_LEN);
    localparam int             MR     = mode_of(OFF + H, H, NUM_MODES, MODE_OFF, MODE_LEN);
    localparam logic [MAXM-1:0] BELOW = modes_below(OFF, LEN, NUM_MODES, MODE_OFF, MODE_LEN);

    logic [H-1:0]   beta_l;    // left estimate, registered at TL
    logic [H-1:0]   beta_r;    // right estimate, registered at TR
    logic [H-1:0]   tap_l;
    logic [H-1:0]   tap_r;
    logic [LEN-1:0] own;       // this node's estimate before its register

    // ---------------------------------------------------------------- left
    if (KL == K_RATE0) begin : g_l0
      assign beta_l = '0;
      assign tap_l  = '0;
    end else begin : g_l
      logic [H-1:0][QI-1:0] f_out, al_d, al_q;
      polar_f #(.HALF(H), .QIN(QIN), .QO(QI)) u_f (.alpha(alpha), .alpha_l(f_out));
      if (ML >= 0) begin : g_inj
        always_comb
          for (int unsigned i = 0; i < H; i++)
            al_d[i] = mode_sel[ML] ? QI'($signed(chan[i])) : f_out[i];
      end else begin : g_noinj
        assign al_d = f_out;
      end
      always_ff @(posedge clk) if (en[T1 % II]) al_q <= al_d;
      polar_node #(
        .LEN(H), .OFF(OFF), .INFO(INFO_L), .T0(T1), .II(II), .QIN(QI), .QI(QI), .QC(QC),
        .REP_MAX(REP_MAX), .SPC_MAX(SPC_MAX), .NUM_MODES(NUM_MODES),
        .MODE_OFF(MODE_OFF), .MODE_LEN(MODE_LEN), .USE_MEM(USE_MEM)
      ) u_l (
        .clk, .en, .mode_sel, .alpha(al_q), .chan(chan[H-1:0]), .beta_q(beta_l), .tap(tap_l)
      );
    end

    // --------------------------------------------------------------- right
    if (KR == K_RATE0) begin : g_r0
      assign beta_r = '0;
      assign tap_r  = '0;
    end else begin : g_r
      // The node's LLRs are needed by G at stage TG: hold them TG - T0 stages.
      localparam int unsigned DA = (TG - T0 + II - 1) / II - 1;
      logic [LEN-1:0][QIN-1:0] alpha_h;
      logic [H-1:0][QI-1:0]    g_out;
      polar_delay #(.W(LEN*QIN), .DEPTH(DA), .USE_MEM(USE_MEM)) u_hold_a (
        .clk, .en(en[T0 % II]), .d(alpha), .q(alpha_h)
      );
      polar_g #(.HALF(H), .QIN(QIN), .QO(QI)) u_g (.alpha(alpha_h), .beta_l(beta_l), .alpha_r(g_out));
      if (KR == K_RATE1) begin : g_gi
        // G followed by the Rate-1 hard decision in the same stage.
        logic [H-1:0] hd;
        always_comb for (int unsigned i = 0; i < H; i++) hd[i] = g_out[i][QI-1];
        always_ff @(posedge clk) if (en[TG % II]) beta_r <= hd;
        assign tap_r = hd;
      end else begin : g_gn
        logic [H-1:0][QI-1:0] ar_d, ar_q;
        if (MR >= 0) begin : g_inj
          always_comb
            for (int unsigned i = 0; i < H; i++)
              ar_d[i] = mode_sel[MR] ? QI'($signed(chan[H+i])) : g_out[i];
        end else begin : g_noinj
          assign ar_d = g_out;
        end
        always_ff @(posedge clk) if (en[TG % II]) ar_q <= ar_d;
        polar_node #(
          .LEN(H), .OFF(OFF + H), .INFO(INFO_R), .T0(TG), .II(II), .QIN(QI), .QI(QI), .QC(QC),
          .REP_MAX(REP_MAX), .SPC_MAX(SPC_MAX), .NUM_MODES(NUM_MODES),
          .MODE_OFF(MODE_OFF), .MODE_LEN(MODE_LEN), .USE_MEM(USE_MEM)
        ) u_r (
          .clk, .en, .mode_sel, .alpha(ar_q), .chan(chan[LEN-1:H]), .beta_q(beta_r), .tap(tap_r)
        );
      end
    end

    // ------------------------------------------------------------- combine
    if (KL == K_RATE0) begin : g_c0r
      // C0R: the right estimate repeated; its register is the right child's.
      assign beta_q = {beta_r, beta_r};
      assign own    = {tap_r, tap_r};
    end else begin : g_comb
      // The left estimate is needed by Combine at stage TC: hold it TC - TL stages.
      localparam int unsigned DB = (TC - TL + II - 1) / II - 1;
      logic [H-1:0] beta_l_h;
      polar_delay #(.W(H), .DEPTH(DB), .USE_MEM(USE_MEM)) u_hold_b (
        .clk, .en(en[TL % II]), .d(beta_l), .q(beta_l_h)
      );
      polar_combine #(.HALF(H)) u_c (.beta_l(beta_l_h), .beta_r(beta_r), .beta_v(own));
      always_ff @(posedge clk) if (en[TC % II]) beta_q <= own;
    end

    // ------------------------------------------------------- output routing
    if (BELOW[NUM_MODES-1:0] != '0) begin : g_route
      assign tap = (|(mode_sel & BELOW[NUM_MODES-1:0])) ? {tap_r, tap_l} : own;
    end else begin : g_noroute
      assign tap = own;
    end
  end
endmodule
