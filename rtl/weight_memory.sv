// weight_memory: multiple-valued connection weights of the network and their
// learning rule.
//
// One weight of WW = ceil(log2(WMAX+1)) bits is kept for every connection
// between two nodes of different clusters, C*(C-1)/2 blocks of L x L weights
// (14336 bits at the default c = 8, l = 16, w_MAX = 3). Storing a message adds
// 1 to each connection of its clique and deleting it subtracts 1, as the
// paper's learning rule does; the bounds 0 and WMAX are enforced by
// saturation, which is how this design reads the rule's w_MIN <= w <= w_MAX
// condition. An update of a stored message is a delete followed by a store.
//
// Each connection is a small saturating up/down counter, enabled when both of
// its nodes are selected by the message's one-hot decoded indices, so all
// C*(C-1)/2 connections of a clique are updated in the same clock cycle:
// `add` or `del` is sampled at the rising edge together with `idx`, the node
// index chosen in each cluster (a non-erased sub-message is its own node
// index). `add` and `del` together do nothing. Every weight is readable at
// all times on `w`, so the global decoder sees the whole network at once.
// Flip-flop storage with a full parallel read port and the one-cycle update
// are this design's choices. `clamp` flags, combinationally, that the
// current add (del) meets at least one connection already at WMAX (at 0).
// An active-low synchronous reset clears every weight.
module weight_memory
  import scn_pkg::*;
#(
  parameter int unsigned C     = C_DEF,
  parameter int unsigned KAPPA = KAPPA_DEF,
  parameter int unsigned WMAX  = WMAX_DEF
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  add,
  input  logic                                  del,
  input  logic [C-1:0][KAPPA-1:0]               idx,
  output logic [C*(C-1)/2-1:0][2**KAPPA-1:0][2**KAPPA-1:0][bits_for(WMAX)-1:0] w,
  output logic                                  clamp
);

  localparam int unsigned WW = bits_for(WMAX);
  localparam int unsigned L  = 2 ** KAPPA;

  // One-hot node selection per cluster: the clique of the message.
  logic [C-1:0][L-1:0] sel;

  always_comb begin
    for (int unsigned i = 0; i < C; i++) sel[i] = L'(1) << idx[i];
  end

  // One saturating up/down counter per connection, enabled when both of its
  // nodes belong to the clique.
  always_ff @(posedge clk) begin
    for (int unsigned p = 0; p < C * (C - 1) / 2; p++) begin
      for (int unsigned ja = 0; ja < L; ja++) begin
        for (int unsigned jb = 0; jb < L; jb++) begin
          if (!rst_n) begin
            w[p][ja][jb] <= '0;
          end
        end
      end
    end
    if (rst_n) begin
      for (int unsigned a = 0; a < C; a++) begin
        for (int unsigned b = a + 1; b < C; b++) begin
          for (int unsigned ja = 0; ja < L; ja++) begin
            for (int unsigned jb = 0; jb < L; jb++) begin
              if (sel[a][ja] && sel[b][jb]) begin
                if (add && !del && w[pair_idx(a, b, C)][ja][jb] != WW'(WMAX)) begin
                  w[pair_idx(a, b, C)][ja][jb] <= w[pair_idx(a, b, C)][ja][jb] + 1'b1;
                end
                if (del && !add && w[pair_idx(a, b, C)][ja][jb] != '0) begin
                  w[pair_idx(a, b, C)][ja][jb] <= w[pair_idx(a, b, C)][ja][jb] - 1'b1;
                end
              end
            end
          end
        end
      end
    end
  end

  always_comb begin
    clamp = 1'b0;
    for (int unsigned a = 0; a < C; a++) begin
      for (int unsigned b = a + 1; b < C; b++) begin
        for (int unsigned ja = 0; ja < L; ja++) begin
          for (int unsigned jb = 0; jb < L; jb++) begin
            if (sel[a][ja] && sel[b][jb]) begin
              if (add && !del && w[pair_idx(a, b, C)][ja][jb] == WW'(WMAX)) clamp = 1'b1;
              if (del && !add && w[pair_idx(a, b, C)][ja][jb] == '0)        clamp = 1'b1;
            end
          end
        end
      end
    end
  end

endmodule
