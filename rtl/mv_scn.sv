// mv_scn: associative memory based on a multiple-valued sparse clustered
// network (MV-SCN), c = 8 clusters of l = 16 nodes, 32-bit messages.
//
// A message is split into C sub-messages of KAPPA bits; each selects one node
// of its cluster. Storing a message adds 1 (up to WMAX) to the weight of
// every connection of its clique, the set of connections between its C
// nodes; deleting it subtracts 1 (down to 0). Because a connection shared by
// several messages carries a count instead of a single bit, deleting one
// message no longer removes connections the others still use. A retrieval
// presents a message with some bits erased: local decoding activates every
// node consistent with the known bits, and global decoding then iterates
// over the normalised (0/1) connections to remove the ambiguities, with
// either the score + winner-take-all rule (Architecture II of the paper) or
// the AND-of-ORs rule (Architecture III), chosen per request.
//
// Request port (valid/ready): `cmd_op` is OP_STORE, OP_DELETE or
// OP_RETRIEVE; `cmd_msg` is the message, `cmd_erase` marks its erased bits
// (retrieval only), `cmd_mode` picks the decoding rule and `cmd_max_iter`
// the iteration limit (retrieval only). A store or delete is accepted in one
// cycle and is in effect from the next; `upd_clamped` is high in that next
// cycle if some connection was already at WMAX (store) or 0 (delete).
// A retrieval drops `cmd_ready` until its result has been presented:
// `rsp_valid` is high for one cycle, k + 1 cycles after acceptance for
// k iterations, with the decoded message, the final activations, per-cluster
// ambiguity and empty flags, the iteration count and whether the activations
// had stopped changing.
//
// Network size, w_MAX = 3, sigma = c and gamma = 1 are the paper's. The
// flip-flop weight store read in full every cycle, the command port, the
// per-request choice of rule and the iteration limit are this design's.
module mv_scn
  import scn_pkg::*;
#(
  parameter int unsigned C     = C_DEF,
  parameter int unsigned KAPPA = KAPPA_DEF,
  parameter int unsigned WMAX  = WMAX_DEF,
  parameter int unsigned GAMMA = GAMMA_DEF,
  parameter int unsigned SIGMA = C,
  parameter int unsigned ITW   = ITW_DEF
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // request
  input  logic                       cmd_valid,
  output logic                       cmd_ready,
  input  op_e                        cmd_op,
  input  logic [C-1:0][KAPPA-1:0]    cmd_msg,
  input  logic [C-1:0][KAPPA-1:0]    cmd_erase,
  input  mode_e                      cmd_mode,
  input  logic [ITW-1:0]             cmd_max_iter,
  // learning status
  output logic                       upd_clamped,
  // retrieval result
  output logic                       rsp_valid,
  output logic [C-1:0][KAPPA-1:0]    rsp_msg,
  output logic [C-1:0][2**KAPPA-1:0] rsp_nodes,
  output logic [C-1:0]               rsp_ambiguous,
  output logic [C-1:0]               rsp_empty,
  output logic [ITW-1:0]             rsp_iters,
  output logic                       rsp_converged
);

  localparam int unsigned L  = 2 ** KAPPA;
  localparam int unsigned NP = C * (C - 1) / 2;
  localparam int unsigned WW = bits_for(WMAX);

  logic                              fire, do_add, do_del, do_ret, clamp;
  logic                              gd_busy;
  logic [C-1:0][L-1:0]               v_local;
  logic [NP-1:0][L-1:0][L-1:0][WW-1:0] w;
  logic [NP-1:0][L-1:0][L-1:0]       psi;

  assign cmd_ready = !gd_busy;
  assign fire      = cmd_valid && cmd_ready;
  assign do_add    = fire && (cmd_op == OP_STORE);
  assign do_del    = fire && (cmd_op == OP_DELETE);
  assign do_ret    = fire && (cmd_op == OP_RETRIEVE);

  for (genvar i = 0; i < C; i++) begin : g_local
    local_decoder #(.KAPPA(KAPPA)) u_ld (
      .sub_msg (cmd_msg[i]),
      .erase   (cmd_erase[i]),
      .v       (v_local[i])
    );
  end

  weight_memory #(.C(C), .KAPPA(KAPPA), .WMAX(WMAX)) u_wmem (
    .clk   (clk),
    .rst_n (rst_n),
    .add   (do_add),
    .del   (do_del),
    .idx   (cmd_msg),
    .w     (w),
    .clamp (clamp)
  );

  weight_normalizer #(.C(C), .L(L), .WMAX(WMAX)) u_norm (
    .w   (w),
    .psi (psi)
  );

  global_decoder #(.C(C), .L(L), .GAMMA(GAMMA), .SIGMA(SIGMA), .ITW(ITW)) u_gd (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (do_ret),
    .v_in      (v_local),
    .mode      (cmd_mode),
    .max_iter  (cmd_max_iter),
    .psi       (psi),
    .busy      (gd_busy),
    .done      (rsp_valid),
    .v         (rsp_nodes),
    .iters     (rsp_iters),
    .converged (rsp_converged)
  );

  node_encoder #(.C(C), .KAPPA(KAPPA)) u_enc (
    .v         (rsp_nodes),
    .msg       (rsp_msg),
    .ambiguous (rsp_ambiguous),
    .empty     (rsp_empty)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) upd_clamped <= 1'b0;
    else        upd_clamped <= (do_add || do_del) && clamp;
  end

  // Learning never happens while a retrieval is decoding.
  a_no_learn_busy: assert property (@(posedge clk) disable iff (!rst_n)
    gd_busy |-> !(do_add || do_del));

endmodule
