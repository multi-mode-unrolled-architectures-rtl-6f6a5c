// polar_combine -- Combine operation: builds a node's bit-estimate vector
// from the estimates of its two children,
//   beta_v[i]        = beta_l[i] xor beta_r[i]   for i <  HALF,
//   beta_v[i + HALF] = beta_r[i]                 for i <  HALF.
// This is the paper's equation.  C0R (left child Rate-0) is the same
// operation with beta_l = 0, i.e. {beta_r, beta_r}; the decoder implements it
// as wiring without this module.  Combinational.
module polar_combine #(
  parameter int unsigned HALF = 512
) (
  input  logic [HALF-1:0]   beta_l,
  input  logic [HALF-1:0]   beta_r,
  output logic [2*HALF-1:0] beta_v
);
  assign beta_v = {beta_r, beta_l ^ beta_r};
endmodule
