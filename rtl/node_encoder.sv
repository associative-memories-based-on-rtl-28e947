// node_encoder: reads the retrieved message back out of the node activations.
//
// For each cluster the index of its active node is the recovered sub-message.
// A cluster with more than one active node is flagged `ambiguous` (the
// reported index is then the lowest active one); a cluster with none is
// flagged `empty` (index 0). A retrieval is unique when neither flag is set
// in any cluster. The paper defines ambiguity; the encoding and the choice
// of the lowest index are this design's own. Purely combinational.
module node_encoder
  import scn_pkg::*;
#(
  parameter int unsigned C     = C_DEF,
  parameter int unsigned KAPPA = KAPPA_DEF
) (
  input  logic [C-1:0][2**KAPPA-1:0] v,
  output logic [C-1:0][KAPPA-1:0]    msg,
  output logic [C-1:0]               ambiguous,
  output logic [C-1:0]               empty
);

  localparam int unsigned L = 2 ** KAPPA;

  always_comb begin
    for (int unsigned i = 0; i < C; i++) begin
      logic found;
      found        = 1'b0;
      msg[i]       = '0;
      ambiguous[i] = 1'b0;
      for (int unsigned j = 0; j < L; j++) begin
        if (v[i][j]) begin
          if (found) ambiguous[i] = 1'b1;
          else       msg[i]       = KAPPA'(j);
          found = 1'b1;
        end
      end
      empty[i] = !found;
    end
  end

endmodule
