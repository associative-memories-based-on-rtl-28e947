// local_decoder: local decoding of one sub-message into its cluster.
//
// A KAPPA-bit sub-message selects node j of an L = 2**KAPPA node cluster,
// with j equal to the sub-message's binary value. Bits marked in `erase` are
// unknown, so every node whose index agrees with the known bits is activated;
// a fully erased sub-message activates the whole cluster. This is the paper's
// local decoding rule; the separate per-bit erasure mask and the
// value-to-index mapping are this design's choices.
//
// Purely combinational: v[j] = ((j ^ sub_msg) & ~erase) == 0.
module local_decoder
  import scn_pkg::*;
#(
  parameter int unsigned KAPPA = KAPPA_DEF
) (
  input  logic [KAPPA-1:0]      sub_msg,
  input  logic [KAPPA-1:0]      erase,
  output logic [2**KAPPA-1:0]   v
);

  localparam int unsigned L = 2 ** KAPPA;

  always_comb begin
    for (int unsigned j = 0; j < L; j++) begin
      v[j] = (((KAPPA'(j) ^ sub_msg) & ~erase) == '0);
    end
  end

endmodule
