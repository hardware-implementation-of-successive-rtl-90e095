// sc_decision: hard-decision unit of the line SC decoder.
//
// Takes the LLR produced by PE 0 while stage 0 is active and returns the bit
// estimate: u = 0 when the sign of the LLR is 0 (LLR >= 0, likelihood ratio
// >= 1), u = 1 otherwise, and u = 0 whenever the bit is frozen. With
// sign-magnitude LLRs the decision is the sign bit itself, so a "-0" decides
// 1; the paper states the rule as "sign(LLR) = 0". Combinational.
module sc_decision #(
  parameter int unsigned Q = 5
) (
  input  logic [Q-1:0] llr,
  input  logic         frozen,
  output logic         u_hat
);

  assign u_hat = llr[Q-1] & ~frozen;

endmodule
