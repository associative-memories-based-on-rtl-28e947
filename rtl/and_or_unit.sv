// and_or_unit: one iteration of the Architecture III (reduced-complexity)
// global decoder.
//
// A node (i, j) stays active only if it is active now and, in every other
// cluster i', at least one active node is connected to it by a normalised
// connection:
//   v*(i,j) = v(i,j) AND_{i' != i} OR_{j'} psi(i,j)(i',j') v(i',j').
// This is the paper's rule. It never activates a node, so it suits inputs
// with erased bits but not inputs with wrong bits. Purely combinational.
module and_or_unit
  import scn_pkg::*;
#(
  parameter int unsigned C = C_DEF,
  parameter int unsigned L = L_DEF
) (
  input  logic [C*(C-1)/2-1:0][L-1:0][L-1:0] psi,
  input  logic [C-1:0][L-1:0]                v,
  output logic [C-1:0][L-1:0]                v_next
);

  always_comb begin
    for (int unsigned i = 0; i < C; i++) begin
      for (int unsigned j = 0; j < L; j++) begin
        logic acc;
        acc = v[i][j];
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
            acc = acc & any;
          end
        end
        v_next[i][j] = acc;
      end
    end
  end

endmodule
