// score_unit: node scores of the Architecture II global decoder.
//
// For every node (i, j) in parallel, the score counts the other clusters i'
// that hold at least one active node connected to (i, j) by a normalised
// binary connection psi, plus GAMMA if (i, j) is itself active:
//   s(i,j) = sum_{i' != i} OR_{j'} ( psi(i,j)(i',j') v(i',j') ) + GAMMA v(i,j).
// Each cluster therefore adds at most 1, so the largest score is
// (C-1) + GAMMA, which equals sigma = c with the paper's GAMMA = 1. The paper
// prints its score as a plain double sum over all nodes, but its worked
// example (a node "must receive 3 connections from other clusters to achieve
// a maximum score of 4") and its reported error rates fit the per-cluster
// form used here (README.md explains the choice). One OR per (node, cluster) and a
// (C-1)+1 input adder per node; purely combinational.
module score_unit
  import scn_pkg::*;
#(
  parameter int unsigned C     = C_DEF,
  parameter int unsigned L     = L_DEF,
  parameter int unsigned GAMMA = GAMMA_DEF
) (
  input  logic [C*(C-1)/2-1:0][L-1:0][L-1:0]         psi,
  input  logic [C-1:0][L-1:0]                        v,
  output logic [C-1:0][L-1:0][score_width(C, GAMMA)-1:0] s
);

  localparam int unsigned SW = score_width(C, GAMMA);

  always_comb begin
    for (int unsigned i = 0; i < C; i++) begin
      for (int unsigned j = 0; j < L; j++) begin
        logic [SW-1:0] acc;
        acc = v[i][j] ? SW'(GAMMA) : '0;
        for (int unsigned i2 = 0; i2 < C; i2++) begin
          if (i2 != i) begin
            logic any;
            any = 1'b0;
            for (int unsigned j2 = 0; j2 < L; j2++) begin
              logic conn;
              conn = (i < i2) ? psi[pair_idx(i, i2, C)][j][j2]
                              : psi[pair_idx(i, i2, C)][j2][j];
              any = any | (conn & v[i2][j2]);
            end
            acc = acc + SW'(any);
          end
        end
        s[i][j] = acc;
      end
    end
  end

endmodule
