// global_decoder: iterative global decoding of a retrieval.
//
// The decoder holds the activation vector v of all C x L nodes. `start`
// loads v from local decoding, together with the rule to use (`mode`) and an
// iteration limit. Each following clock applies one iteration of the chosen
// rule to the whole network:
//   MODE_ARCH2  score_unit + wta: scores from normalised connections, then
//               winner-take-all per cluster with threshold SIGMA;
//   MODE_ARCH3  and_or_unit: keep a node only if every other cluster holds
//               an active node connected to it.
// Decoding stops after the first iteration that leaves v unchanged
// (`converged`) or after `max_iter` iterations, whichever comes first
// (a limit of 0 counts as 1). `done` is then high for one cycle with the
// final v, the number of iterations performed and the convergence flag; v
// holds its value until the next `start`. `busy` is high while iterating:
// after the clock edge that samples `start`, k iterations take the next k
// edges, `done` is high in the cycle after the k-th and a new `start` may
// be sampled at the end of that same cycle, so back-to-back retrievals of k
// iterations each start every k + 1 cycles.
//
// The two iteration rules and the stop-on-convergence rule follow the paper;
// one iteration per clock, the iteration limit input and the handshake are
// this design's choices. Both rules are built so that one design can run
// either of the paper's two recommended architectures.
module global_decoder
  import scn_pkg::*;
#(
  parameter int unsigned C     = C_DEF,
  parameter int unsigned L     = L_DEF,
  parameter int unsigned GAMMA = GAMMA_DEF,
  parameter int unsigned SIGMA = C_DEF,
  parameter int unsigned ITW   = ITW_DEF
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  logic [C-1:0][L-1:0]                v_in,
  input  mode_e                              mode,
  input  logic [ITW-1:0]                     max_iter,
  input  logic [C*(C-1)/2-1:0][L-1:0][L-1:0] psi,
  output logic                               busy,
  output logic                               done,
  output logic [C-1:0][L-1:0]                v,
  output logic [ITW-1:0]                     iters,
  output logic                               converged
);

  localparam int unsigned SW = score_width(C, GAMMA);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  state_e                     state;
  mode_e                      mode_q;
  logic [ITW-1:0]             limit_q;
  logic [C-1:0][L-1:0][SW-1:0] s;
  logic [C-1:0][L-1:0]        v_arch2, v_arch3, v_next;
  logic                       last;

  score_unit #(.C(C), .L(L), .GAMMA(GAMMA)) u_score (
    .psi (psi), .v (v), .s (s)
  );

  wta #(.C(C), .L(L), .SW(SW), .SIGMA(SIGMA)) u_wta (
    .s (s), .v_next (v_arch2)
  );

  and_or_unit #(.C(C), .L(L)) u_and_or (
    .psi (psi), .v (v), .v_next (v_arch3)
  );

  assign v_next = (mode_q == MODE_ARCH3) ? v_arch3 : v_arch2;
  assign last   = (v_next == v) || (iters + 1'b1 >= limit_q);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      mode_q    <= MODE_ARCH2;
      limit_q   <= '0;
      v         <= '0;
      iters     <= '0;
      converged <= 1'b0;
    end else begin
      unique case (state)
        S_RUN: begin
          v     <= v_next;
          iters <= iters + 1'b1;
          if (last) begin
            converged <= (v_next == v);
            state     <= S_DONE;
          end
        end
        default: begin  // S_IDLE, S_DONE
          if (start) begin
            v         <= v_in;
            mode_q    <= mode;
            limit_q   <= (max_iter == '0) ? ITW'(1) : max_iter;
            iters     <= '0;
            converged <= 1'b0;
            state     <= S_RUN;
          end else begin
            state     <= S_IDLE;
          end
        end
      endcase
    end
  end

  assign busy = (state == S_RUN);
  assign done = (state == S_DONE);

  // A retrieval never runs past its iteration limit.
  a_iter_limit: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_RUN) |-> (iters < limit_q));

endmodule
