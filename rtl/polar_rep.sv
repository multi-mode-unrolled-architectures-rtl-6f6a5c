// polar_rep -- Repetition-node decoder.
//
// A repetition constituent code of LEN bits carries one information bit (its
// last leaf) repeated on every position.  Its estimate is a threshold test on
// the sum of all LLRs: 0 when the sum is >= 0, 1 otherwise, replicated over
// the LEN outputs.  This is the paper's rule.  The sum is exact (no
// saturation): it is formed on Q + clog2(LEN) bits.  Combinational.
module polar_rep #(
  parameter int unsigned LEN = 8,
  parameter int unsigned Q   = 5
) (
  input  logic [LEN-1:0][Q-1:0] alpha,
  output logic [LEN-1:0]        beta
);
  localparam int unsigned SW = Q + $clog2(LEN) + 1;

  logic signed [SW-1:0] sum;
  always_comb begin
    sum = '0;
    for (int unsigned i = 0; i < LEN; i++) sum += SW'($signed(alpha[i]));
    beta = {LEN{sum[SW-1]}};
  end
endmodule
