// polar_spc -- Single-parity-check node decoder.
//
// An SPC constituent code of LEN bits has only its first leaf frozen, so every
// codeword has even parity.  The decoder takes hard decisions on the LLRs
// (bit = sign), computes their parity and, when it is odd, flips the bit whose
// LLR has the smallest magnitude.  This is the paper's algorithm.  When two
// LLRs tie for the smallest magnitude the lowest index is flipped (a choice of
// this design).  Combinational.
module polar_spc #(
  parameter int unsigned LEN = 4,
  parameter int unsigned Q   = 5
) (
  input  logic [LEN-1:0][Q-1:0] alpha,
  output logic [LEN-1:0]        beta
);
  logic [LEN-1:0] hd;
  logic           parity;
  logic [Q-1:0]   best;
  localparam int unsigned IW = (LEN > 1) ? $clog2(LEN) : 1;
  logic [IW-1:0]  idx;

  always_comb begin
    parity = 1'b0;
    best   = '1;
    idx    = '0;
    for (int unsigned i = 0; i < LEN; i++) begin
      logic signed [Q-1:0] a;
      logic        [Q-1:0] mag;
      a      = $signed(alpha[i]);
      hd[i]  = a[Q-1];
      parity = parity ^ a[Q-1];
      mag    = a[Q-1] ? Q'(-a) : Q'(a);
      if (i == 0 || mag < best) begin
        best = mag;
        idx  = IW'(i);
      end
    end
    beta = hd;
    if (parity) beta[idx] = ~hd[idx];
  end
endmodule
