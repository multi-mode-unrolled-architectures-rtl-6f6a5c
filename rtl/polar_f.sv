// polar_f -- F operation of successive-cancellation decoding (min-sum form).
//
// For a node holding 2*HALF LLRs a[], the LLRs passed to its left child are
//   alpha_l[i] = sgn(a[i] * a[i+HALF]) * min(|a[i]|, |a[i+HALF]|),  0 <= i < HALF.
// The formula is the paper's.  Inputs are QIN-bit and outputs QO-bit two's
// complement numbers; the magnitude is saturated to 2^(QO-1)-1 so that the
// result stays in the symmetric range used throughout the decoder (a choice of
// this design: only matters when QIN >= QO and an input equals -2^(QIN-1)).
// Purely combinational; the caller registers the result.
module polar_f #(
  parameter int unsigned HALF = 512,
  parameter int unsigned QIN  = 5,
  parameter int unsigned QO   = 5
) (
  input  logic [2*HALF-1:0][QIN-1:0] alpha,
  output logic [HALF-1:0][QO-1:0]    alpha_l
);
  localparam int unsigned LIM = (1 << (QO - 1)) - 1;

  always_comb begin
    for (int unsigned i = 0; i < HALF; i++) begin
      logic signed [QIN-1:0] a, b;
      logic        [QIN-1:0] ma, mb, mn;
      logic        [QO-1:0]  m;
      a  = $signed(alpha[i]);
      b  = $signed(alpha[i+HALF]);
      ma = a[QIN-1] ? QIN'(-a) : QIN'(a);
      mb = b[QIN-1] ? QIN'(-b) : QIN'(b);
      mn = (ma < mb) ? ma : mb;
      m  = (32'(mn) > LIM) ? QO'(LIM) : QO'(mn);
      alpha_l[i] = (a[QIN-1] ^ b[QIN-1]) ? QO'(-m) : m;
    end
  end
endmodule
