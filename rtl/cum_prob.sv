// cum_prob: cumulative probability approximation for the two children of a fork.
//
// A path's confidence is the product of the probabilities of the branch
// outcomes along it. When a path of confidence P forks, the confidence
// counter c of the branch (CW bits) is turned into the probability p that the
// predicted direction is right, and the children receive
//   predicted child: P * p          other child: P * (1 - p)
// with P a CONF_W-bit fraction (all ones ~ 1.0). The paper names this unit
// and calls for "confidence multipliers"; the mapping of the counter to p is
// this design's choice: p = (2**(CW) + c) / 2**(CW+1), i.e. from 0.5 for c = 0
// to just under 1.0 for the top counter value, in steps of 1/2**(CW+1).
// Purely combinational: two multipliers.
module cum_prob #(
  parameter int unsigned CONF_W = 16,
  parameter int unsigned CW     = 4
) (
  input  logic [CONF_W-1:0] parent_conf,
  input  logic [CW-1:0]     ctr,
  output logic [CONF_W-1:0] pred_conf,  // child on the predicted direction
  output logic [CONF_W-1:0] alt_conf    // child on the other direction
);
  localparam int unsigned PW = CW + 2;  // holds 2**(CW+1)
  logic [PW-1:0] p_num, q_num;
  logic [CONF_W+PW-1:0] prod_p, prod_q;

  always_comb begin
    p_num  = PW'(1 << CW) + PW'(ctr);
    q_num  = PW'(1 << (CW + 1)) - p_num;
    prod_p = (CONF_W+PW)'(parent_conf) * (CONF_W+PW)'(p_num);
    prod_q = (CONF_W+PW)'(parent_conf) * (CONF_W+PW)'(q_num);
    pred_conf = CONF_W'(prod_p >> (CW + 1));
    alt_conf  = CONF_W'(prod_q >> (CW + 1));
  end
endmodule
