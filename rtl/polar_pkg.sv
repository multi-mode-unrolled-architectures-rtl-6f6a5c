// polar_pkg -- shared constants, types and elaboration-time schedule functions
// for the multi-mode unrolled Fast-SSC polar decoder.
//
// The decoder is built at elaboration time from a frozen-bit mask: every node of
// the decoder tree is classified (Rate-0, Rate-1, Repetition, SPC or a generic
// node that is split in two) and every operation is given a fixed pipeline
// stage.  The functions below compute that classification and schedule; the
// RTL modules and the controller use them so that the hardware and its
// look-up tables always agree.
//
// Schedule rules (one stage = one clock edge):
//   * F, G, G0R, Repetition, SPC and a stand-alone Rate-1 hard decision each
//     take one stage and end in a register.
//   * A Rate-1 right child is merged with the G that feeds it ("G followed by
//     I") into a single stage.
//   * Combine takes one stage.  C0R (left child Rate-0) is pure wiring and
//     takes none; a Rate-0 node costs nothing.
// With the default (1024, 853) code these rules reproduce the decoding
// latencies of all eight supported codes (323, 95, 226, 86, 138, 54, 82 and 54
// cycles including the input load) and the i_start value of 17 (mod 20) of the
// (128, 96) constituent code.
//
// Default code: a (1024, 853) polar code.  Bit i of INFO_1024_853 is 1 when
// u_i carries information.  The set was built with the Bhattacharyya-bound
// construction: z_0 = exp(-R * Eb/N0) with R = 853/1024 and a design Eb/N0 of
// 5.8 dB, each tree level maps z to (2z - z^2) for the left child and z^2 for
// the right child, and the 853 leaves with the smallest z are information
// bits.  Its constituent codes are exactly the (512,363), (512,490),
// (256,135), (256,228), (128,39), (128,96) and (128,108) codes of the
// eight-mode decoder.
package polar_pkg;

  // Widest code the schedule functions can handle.
  localparam int unsigned NMAX = 1024;
  // Largest number of modes (supported codes) a decoder can have.
  localparam int unsigned MAXM = 16;

  // Main configuration: N_max = 1024, I = 20, 5.4.0 quantisation,
  // Repetition nodes up to 8 and SPC nodes up to 4 LLRs.
  localparam int unsigned N_DEF       = 1024;
  localparam int unsigned II_DEF      = 20;
  localparam int unsigned Q_C_DEF     = 4;
  localparam int unsigned Q_I_DEF     = 5;
  localparam int unsigned REP_MAX_DEF = 8;
  localparam int unsigned SPC_MAX_DEF = 4;

  localparam logic [1023:0] INFO_1024_853 = {
    256'hfffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffe,
    256'hfffffffffffffffffffffffffffffffefffffffffffffffefffffff8fee8e880,
    256'hfffffffffffffffffffffffffffffffcffffffffffffffe8fffefee8fee8e880,
    256'hfffffffefffefee8fffefee8fee8c000fffefee0fc808000e880800000000000};

  typedef int unsigned mode_tab_t [MAXM];

  // Supported codes (modes) as tree nodes: leaf offset and length.
  //   0: (1024,853)  1: (512,363)  2: (512,490)  3: (256,135)
  //   4: (256,228)   5: (128,39)   6: (128,96)   7: (128,108)
  localparam int unsigned NUM_MODES_DEF = 8;
  localparam mode_tab_t MODE_OFF_DEF = '{0, 0, 512, 0, 256, 0, 128, 512,
                                         0, 0, 0, 0, 0, 0, 0, 0};
  localparam mode_tab_t MODE_LEN_DEF = '{1024, 512, 512, 256, 256, 128, 128, 128,
                                         0, 0, 0, 0, 0, 0, 0, 0};

  typedef enum logic [2:0] {
    K_RATE0, K_RATE1, K_REP, K_SPC, K_SPLIT
  } node_kind_e;

  function automatic node_kind_e classify(int unsigned cnt, int unsigned sz, logic fst, logic lst,
                                          int unsigned rep_max, int unsigned spc_max);
    if (cnt == 0) return K_RATE0;
    if (cnt == sz) return K_RATE1;
    if (sz <= rep_max && cnt == 1 && lst) return K_REP;
    if (sz <= spc_max && cnt == sz - 1 && !fst) return K_SPC;
    return K_SPLIT;
  endfunction

  // Kind of the node whose leaves are info[len-1:0].
  function automatic node_kind_e node_kind(logic [NMAX-1:0] info, int unsigned len,
                                           int unsigned rep_max, int unsigned spc_max);
    logic [NMAX-1:0] msk = (len >= NMAX) ? '1 : ((NMAX'(1) << len) - 1);
    int unsigned cnt = $countones(info & msk);
    return classify(cnt, len, info[0], info[len-1], rep_max, spc_max);
  endfunction

  // Number of pipeline stages from the register holding the node's LLRs to
  // the register holding its estimate (0 for Rate-0), for the node whose
  // leaves are info[len-1:0].  Recursive over the decoder tree.
  function automatic int unsigned node_lat(logic [NMAX-1:0] info, int unsigned len,
                                           int unsigned rep_max, int unsigned spc_max);
    node_kind_e      k, kl, kr;
    int unsigned     h, lat;
    logic [NMAX-1:0] l, r;
    k = node_kind(info, len, rep_max, spc_max);
    if (k == K_RATE0) return 0;
    if (k != K_SPLIT) return 1;
    h   = len / 2;
    l   = info & ((NMAX'(1) << h) - 1);
    r   = (info >> h) & ((NMAX'(1) << h) - 1);
    kl  = node_kind(l, h, rep_max, spc_max);
    kr  = node_kind(r, h, rep_max, spc_max);
    lat = 0;
    if (kl != K_RATE0) lat += 1 + node_lat(l, h, rep_max, spc_max);   // F, left child
    if (kr == K_RATE1) lat += 1;                                       // G merged with I
    else if (kr != K_RATE0) lat += 1 + node_lat(r, h, rep_max, spc_max); // G, right child
    if (kl != K_RATE0) lat += 1;                                       // Combine (C0R free)
    return lat;
  endfunction

  // Stage at which the LLR register of node (off, len) is loaded when the
  // master code of length n starts at stage 0: the i_start of that node.
  function automatic int unsigned node_start(logic [NMAX-1:0] info, int unsigned n,
                                             int unsigned off, int unsigned len,
                                             int unsigned rep_max, int unsigned spc_max);
    int unsigned t = 0;
    int unsigned o = 0;
    int unsigned s = n;
    logic [NMAX-1:0] left;
    while (s > len) begin
      s = s / 2;
      if (off < o + s) begin
        t += 1;                                                  // F
      end else begin
        left = (info >> o) & ((NMAX'(1) << s) - 1);
        if (node_kind(left, s, rep_max, spc_max) != K_RATE0)
          t += 1 + node_lat(left, s, rep_max, spc_max);          // F and left child
        t += 1;                                                  // G
        o += s;
      end
    end
    return t;
  endfunction

  // Index of the mode decoding node (off, len), or -1.
  function automatic int mode_of(int unsigned off, int unsigned len, int unsigned num_modes,
                                 mode_tab_t moff, mode_tab_t mlen);
    for (int unsigned m = 0; m < num_modes; m++)
      if (moff[m] == off && mlen[m] == len) return int'(m);
    return -1;
  endfunction

  // Bit m set when mode m lies strictly inside the subtree (off, len).
  function automatic logic [MAXM-1:0] modes_below(int unsigned off, int unsigned len,
                                                 int unsigned num_modes,
                                                 mode_tab_t moff, mode_tab_t mlen);
    logic [MAXM-1:0] r = '0;
    for (int unsigned m = 0; m < num_modes; m++)
      if (moff[m] >= off && moff[m] + mlen[m] <= off + len && mlen[m] < len) r[m] = 1'b1;
    return r;
  endfunction

  // Symmetric saturation of a signed value to q bits: [-(2^(q-1)-1), 2^(q-1)-1].
  function automatic int sat(int v, int unsigned q);
    int lim = (1 <<< (q - 1)) - 1;
    if (v > lim) return lim;
    if (v < -lim) return -lim;
    return v;
  endfunction

endpackage
