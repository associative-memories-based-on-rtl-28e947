// weight_normalizer: normalisation of multiple-valued weights to binary
// connections, psi = (w >= 1), as the paper does before either of its
// recommended global decoders, so that a connection shared by several stored
// messages counts no more than one used by a single message.
//
// Purely combinational, one OR of the WW weight bits per connection. The
// layout of `w` and `psi` is the pair-block layout of scn_pkg.
module weight_normalizer
  import scn_pkg::*;
#(
  parameter int unsigned C     = C_DEF,
  parameter int unsigned L     = L_DEF,
  parameter int unsigned WMAX  = WMAX_DEF
) (
  input  logic [C*(C-1)/2-1:0][L-1:0][L-1:0][bits_for(WMAX)-1:0] w,
  output logic [C*(C-1)/2-1:0][L-1:0][L-1:0]                      psi
);

  for (genvar p = 0; p < C * (C - 1) / 2; p++) begin : g_pair
    for (genvar ja = 0; ja < L; ja++) begin : g_row
      for (genvar jb = 0; jb < L; jb++) begin : g_col
        assign psi[p][ja][jb] = |w[p][ja][jb];
      end
    end
  end

endmodule
