// wta: winner-take-all step of the Architecture II global decoder.
//
// In each cluster the largest score is found; a node is active after the
// iteration if its score equals that maximum and the maximum reaches SIGMA.
// Several nodes of a cluster may tie and all stay active (an ambiguity); a
// cluster whose maximum is below SIGMA ends with no active node. This is the
// paper's rule, with SIGMA = c as the paper sets it; taking the maximum per
// cluster follows the paper's description of the rule. Purely combinational.
module wta
  import scn_pkg::*;
#(
  parameter int unsigned C     = C_DEF,
  parameter int unsigned L     = L_DEF,
  parameter int unsigned SW    = score_width(C_DEF, GAMMA_DEF),
  parameter int unsigned SIGMA = C_DEF
) (
  input  logic [C-1:0][L-1:0][SW-1:0] s,
  output logic [C-1:0][L-1:0]         v_next
);

  always_comb begin
    for (int unsigned i = 0; i < C; i++) begin
      logic [SW-1:0] smax;
      smax = '0;
      for (int unsigned j = 0; j < L; j++) begin
        if (s[i][j] > smax) smax = s[i][j];
      end
      for (int unsigned j = 0; j < L; j++) begin
        v_next[i][j] = (s[i][j] == smax) && (32'(smax) >= SIGMA);
      end
    end
  end

endmodule
