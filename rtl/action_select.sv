// action_select: epsilon-greedy action choice.
//
// Combinational. With a random byte below EPS_Q8 (probability EPS_Q8/256) a random
// action is returned (explore, rnd[10:8]); otherwise the action with the highest Q
// value (lowest index on a tie, exploit). explored tells which happened. The paper
// gives the epsilon-greedy rule; epsilon = 26/256 (about 0.1) and the random source
// are this design's choices.
module action_select
  import aimm_pkg::*;
#(
  parameter int unsigned EPS_Q8 = 26
) (
  input  feat_t [N_ACTIONS-1:0] q,
  input  logic  [15:0]          rnd,
  output action_e               action,
  output logic                  explored
);
  logic [2:0] best;
  always_comb begin
    best = '0;
    for (int i = 1; i < N_ACTIONS; i++)
      if (q[i] > q[best]) best = 3'(i);
    explored = ({8'd0, rnd[7:0]} < 16'(EPS_Q8));
    action   = explored ? action_e'(rnd[10:8]) : action_e'(best);
  end
endmodule
