// polar_g -- G and G0R operations of successive-cancellation decoding.
//
// For a node holding 2*HALF LLRs a[] and the left child's bit estimates
// beta_l[], the LLRs passed to the right child are
//   alpha_r[i] = a[i+HALF] + a[i]   when beta_l[i] = 0,
//   alpha_r[i] = a[i+HALF] - a[i]   otherwise.
// G0R is the same operation with beta_l known to be all zero (left child
// Rate-0): the caller ties beta_l to zero and synthesis removes the
// subtractor.  The sum is computed on QIN+1 bits and saturated to the
// symmetric QO-bit range (saturation is this design's choice; the paper fixes
// only the 5-bit internal and 4-bit channel LLR widths).  Combinational.
module polar_g #(
  parameter int unsigned HALF = 512,
  parameter int unsigned QIN  = 4,
  parameter int unsigned QO   = 5
) (
  input  logic [2*HALF-1:0][QIN-1:0] alpha,
  input  logic [HALF-1:0]            beta_l,
  output logic [HALF-1:0][QO-1:0]    alpha_r
);
  localparam int signed LIM = (1 <<< (QO - 1)) - 1;

  always_comb begin
    for (int unsigned i = 0; i < HALF; i++) begin
      logic signed [QIN:0] a, b, s;
      a = (QIN+1)'($signed(alpha[i]));
      b = (QIN+1)'($signed(alpha[i+HALF]));
      s = beta_l[i] ? (b - a) : (b + a);
      if (32'(s) > LIM)       alpha_r[i] = QO'(LIM);
      else if (32'(s) < -LIM) alpha_r[i] = QO'(-LIM);
      else                    alpha_r[i] = QO'(s);
    end
  end
endmodule
