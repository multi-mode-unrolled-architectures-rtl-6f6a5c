// polar_ref_pkg -- software reference for the decoder testbenches.
//
// A plain recursive Fast-SSC decoder on integer arrays with the same node
// rules and fixed-point conventions as the hardware (min-sum F, G with
// saturation to the symmetric Q-bit range, Repetition = sign of the exact sum,
// SPC = hard decision with the least-reliable bit flipped on odd parity, the
// lowest index winning ties, Rate-1 = sign, Rate-0 = zeros), plus a polar
// encoder and a noisy BPSK channel model.  It is written from the decoding
// equations and shares no code with the RTL.
package polar_ref_pkg;

  typedef int      iarr_t[];
  typedef bit      barr_t[];

  function automatic int satq(int v, int q);
    int lim = (1 <<< (q - 1)) - 1;
    return (v > lim) ? lim : (v < -lim) ? -lim : v;
  endfunction

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  // Node kind from the info flags of its leaves: 0 Rate-0, 1 Rate-1, 2 Rep,
  // 3 SPC, 4 generic.
  function automatic int kind_of(barr_t info, int off, int len, int rep_max, int spc_max);
    int k = 0;
    for (int i = 0; i < len; i++) k += int'(info[off + i]);
    if (k == 0) return 0;
    if (k == len) return 1;
    if (len <= rep_max && k == 1 && info[off + len - 1]) return 2;
    if (len <= spc_max && k == len - 1 && !info[off]) return 3;
    return 4;
  endfunction

  // Decodes the node covering leaves off .. off+len-1, given its LLRs a[].
  function automatic barr_t decode(iarr_t a, barr_t info, int off, int len,
                                   int qi, int rep_max, int spc_max);
    barr_t b = new[len];
    int    k = kind_of(info, off, len, rep_max, spc_max);
    case (k)
      0: foreach (b[i]) b[i] = 1'b0;
      1: foreach (b[i]) b[i] = (a[i] < 0);
      2: begin
        int s = 0;
        foreach (a[i]) s += a[i];
        foreach (b[i]) b[i] = (s < 0);
      end
      3: begin
        bit par = 0;
        int mi = 0;
        foreach (a[i]) begin
          b[i] = (a[i] < 0);
          par ^= b[i];
          if (iabs(a[i]) < iabs(a[mi])) mi = i;
        end
        if (par) b[mi] = ~b[mi];
      end
      default: begin
        int    h = len / 2;
        iarr_t al = new[h];
        iarr_t ar = new[h];
        barr_t bl, br;
        for (int i = 0; i < h; i++) begin
          int m = (iabs(a[i]) < iabs(a[i+h])) ? iabs(a[i]) : iabs(a[i+h]);
          m = satq(m, qi);
          al[i] = ((a[i] < 0) != (a[i+h] < 0)) ? -m : m;
        end
        bl = decode(al, info, off, h, qi, rep_max, spc_max);
        for (int i = 0; i < h; i++)
          ar[i] = satq(bl[i] ? a[i+h] - a[i] : a[i+h] + a[i], qi);
        br = decode(ar, info, off + h, h, qi, rep_max, spc_max);
        for (int i = 0; i < h; i++) begin
          b[i]     = bl[i] ^ br[i];
          b[i + h] = br[i];
        end
      end
    endcase
    return b;
  endfunction

  // Polar transform x = u * G (same bit order as the decoder tree).
  function automatic barr_t encode(barr_t u);
    barr_t x = new[u.size()];
    x = u;
    for (int s = 1; s < u.size(); s *= 2)
      for (int blk = 0; blk < u.size(); blk += 2 * s)
        for (int i = 0; i < s; i++) x[blk + i] ^= x[blk + s + i];
    return x;
  endfunction

  // BPSK (bit 0 -> +A, bit 1 -> -A) plus uniform noise of +-noise, clipped to
  // the qc-bit symmetric range.
  function automatic int chan_llr(bit x, int amp, int noise, int qc);
    int n = (noise == 0) ? 0 : (int'($urandom_range(2 * noise, 0)) - noise);
    return satq((x ? -amp : amp) + n, qc);
  endfunction

endpackage
