// delta_unit: damping-factor selection of the input-LLR generator (Lgen).
//
// What it does. For sub-decoder i in iteration t it yields, for every code bit j, the term
// Delta * (1 - 2 c1_j) that is added to the channel LLR y: the new LLR is
//     L~(i,j) = y_k + Delta(i,j) * (1 - 2 c(j,i)^{t-1}).
// Delta is delta^t = alpha+beta when sub-code j failed its check in iteration t-1 (e_j = 1)
// and its bit disagrees with this sub-code's own bit of iteration t-2, theta^t = alpha-beta
// when they agree, and gamma^t when sub-code j passed (e_j = 0).
//
// How it works. Three-way select per bit; the sign is returned as neg_o = c1 so that the
// SC core's PE adders compute y + (neg ? -Delta : Delta). first_i forces Delta = 0 for the
// first iteration, when no hard outputs exist yet and the LLRs are the channel LLRs.
//
// Interface and timing. Combinational. c1_i = c^{t-1}(j,i) from the alternate graph,
// c2_i = c^{t-2}(i,j) from the same graph, e_i = e_j^{t-1}. The selection rule is the
// paper's; the first-iteration handling and coefficient ports are this design's.
module delta_unit
  import gn_pkg::*;
#(
  parameter int unsigned N = NSUB
) (
  input  logic [N-1:0] c1_i,
  input  logic [N-1:0] c2_i,
  input  logic [N-1:0] e_i,
  input  llr_t         delta_i,
  input  llr_t         theta_i,
  input  llr_t         gamma_i,
  input  logic         first_i,
  output llr_t         d_o   [N],
  output logic [N-1:0] neg_o
);
  always_comb
    for (int j = 0; j < N; j++) begin
      if (first_i)                 d_o[j] = '0;
      else if (!e_i[j])            d_o[j] = gamma_i;
      else if (c1_i[j] != c2_i[j]) d_o[j] = delta_i;
      else                         d_o[j] = theta_i;
    end

  assign neg_o = c1_i;
endmodule
