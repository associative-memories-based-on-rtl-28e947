// tb_mv_scn: end-to-end test of the MV-SCN memory at its default size
// (8 clusters x 16 nodes, 32-bit messages, w_MAX = 3), following the kind of
// experiment the memory is meant for:
//   1. store M = 131 random messages, density 1-(1-1/256)^131 = 0.40;
//   2. retrieve every stored message with half of its clusters erased
//      (ce = 0.5), with both decoding rules and 1 and 4 iterations;
//   3. delete half of the messages (deletion rate 0.5), retrieve the rest;
//   4. replace a quarter of the rest by new messages (update), retrieve;
//   5. store one message four times and delete it four times, to reach
//      both weight bounds, and retrieve some never-stored messages and some
//      with scattered erased bits.
// A reference model (integer weights, full symmetric matrix, each decoding
// rule coded from its equation) predicts every result: node activations,
// iteration count, convergence flag, the clamp flag of each store/delete and
// the response latency (rsp_valid k edges after the accepting edge). Retrieval
// requests are issued back to back so that the request port must stall.
// The message error rate of each phase is printed. Every mechanism (store,
// delete, both clamps, both rules, early convergence, iteration limit,
// ambiguous and empty clusters, stall) is counted and must occur.
module tb_mv_scn;
  import scn_pkg::*;
  import scn_ref_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       cmd_valid = 0, cmd_ready;
  op_e        cmd_op = OP_STORE;
  msg_t       cmd_msg = '0, cmd_erase = '0;
  mode_e      cmd_mode = MODE_ARCH2;
  logic [3:0] cmd_max_iter = 4'd1;
  logic       upd_clamped, rsp_valid, rsp_converged;
  msg_t       rsp_msg;
  act_vec_t   rsp_nodes;
  logic [C-1:0] rsp_ambiguous, rsp_empty;
  logic [3:0] rsp_iters;

  mv_scn dut (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_op(cmd_op), .cmd_msg(cmd_msg),
    .cmd_erase(cmd_erase), .cmd_mode(cmd_mode), .cmd_max_iter(cmd_max_iter),
    .upd_clamped(upd_clamped),
    .rsp_valid(rsp_valid), .rsp_msg(rsp_msg), .rsp_nodes(rsp_nodes),
    .rsp_ambiguous(rsp_ambiguous), .rsp_empty(rsp_empty), .rsp_iters(rsp_iters),
    .rsp_converged(rsp_converged)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_store = 0, n_delete = 0, n_sat = 0, n_floor = 0, n_a2 = 0, n_a3 = 0;
  int n_conv = 0, n_limit = 0, n_amb = 0, n_empty = 0, n_stall = 0, n_ok = 0;

  int   wref [C][L][C][L];
  msg_t msgs [$];
  msg_t gone [$];

  initial begin
    #50ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic conn_t ref_conn();
    conn_t cn;
    for (int a = 0; a < C; a++) for (int ja = 0; ja < L; ja++)
      for (int b = 0; b < C; b++) for (int jb = 0; jb < L; jb++)
        cn[a][ja][b][jb] = (wref[a][ja][b][jb] >= 1);
    return cn;
  endfunction

  function automatic msg_t rand_msg();
    msg_t m;
    for (int i = 0; i < C; i++) m[i] = KAPPA'($urandom_range(0, L - 1));
    return m;
  endfunction

  function automatic msg_t half_erased();
    msg_t e;
    int   pick [C];
    e = '0;
    for (int i = 0; i < C; i++) pick[i] = i;
    pick.shuffle();
    for (int n = 0; n < C / 2; n++) e[pick[n]] = '1;
    return e;
  endfunction

  // Present a request from a falling edge until it is accepted.
  task automatic issue(input op_e op, input msg_t m, input msg_t e,
                       input mode_e md, input int it);
    cmd_op = op; cmd_msg = m; cmd_erase = e; cmd_mode = md; cmd_max_iter = 4'(it);
    cmd_valid = 1;
    while (!cmd_ready) begin
      n_stall++;
      @(negedge clk);
    end
    @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic learn(input bit is_add, input msg_t m);
    bit exp_clamp;
    exp_clamp = 0;
    for (int a = 0; a < C; a++) for (int b = a + 1; b < C; b++) begin
      if (is_add && wref[a][m[a]][b][m[b]] == WMAX_DEF) exp_clamp = 1;
      if (!is_add && wref[a][m[a]][b][m[b]] == 0) exp_clamp = 1;
    end
    for (int a = 0; a < C; a++) for (int b = 0; b < C; b++) if (a != b) begin
      if (is_add && wref[a][m[a]][b][m[b]] < WMAX_DEF) wref[a][m[a]][b][m[b]]++;
      if (!is_add && wref[a][m[a]][b][m[b]] > 0) wref[a][m[a]][b][m[b]]--;
    end
    issue(is_add ? OP_STORE : OP_DELETE, m, '0, MODE_ARCH2, 1);
    checks++;
    if (upd_clamped !== exp_clamp) begin
      failures++;
      $display("FAIL clamp flag %b, expected %b", upd_clamped, exp_clamp);
    end
    if (is_add) n_store++; else n_delete++;
    if (exp_clamp && is_add) n_sat++;
    if (exp_clamp && !is_add) n_floor++;
  endtask

  // Retrieve; returns 1 when the message came back unique and correct.
  task automatic retrieve(input msg_t m, input msg_t e, input bit a3, input int it,
                          output bit ok);
    conn_t cn;
    act_t  vr, vnx;
    int    k, lim, cyc;
    bit    conv, amb, emp;
    cn = ref_conn();
    vr = local_dec(m, e);
    lim = (it == 0) ? 1 : it;
    k = 0;
    do begin
      vnx  = a3 ? step_arch3(cn, vr) : step_arch2(cn, vr);
      k++;
      conv = act_eq(vnx, vr);
      vr   = vnx;
    end while (!conv && k < lim);
    issue(OP_RETRIEVE, m, e, a3 ? MODE_ARCH3 : MODE_ARCH2, it);
    // issue() returns at the falling edge after the accepting edge
    cyc = 0;
    while (!rsp_valid && cyc < 40) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != k) begin
      failures++;
      $display("FAIL latency: rsp_valid %0d edges after acceptance, expected %0d", cyc, k);
    end
    checks++;
    if (!act_eq(unpack_act(rsp_nodes), vr) || int'(rsp_iters) != k || rsp_converged !== conv) begin
      failures++;
      $display("FAIL retrieve mode=%0d it=%0d iters=%0d/%0d conv=%b/%b", a3, it, rsp_iters, k, rsp_converged, conv);
    end
    amb = 0; emp = 0;
    for (int i = 0; i < C; i++) begin
      int cnt;
      cnt = 0;
      for (int j = 0; j < L; j++) cnt += vr[i][j];
      if (cnt > 1) amb = 1;
      if (cnt == 0) emp = 1;
    end
    checks++;
    if ((|rsp_ambiguous) !== amb || (|rsp_empty) !== emp) begin
      failures++;
      $display("FAIL flags amb=%b/%b empty=%b/%b", |rsp_ambiguous, amb, |rsp_empty, emp);
    end
    ok = !amb && !emp && (rsp_msg == m);
    if (amb) n_amb++;
    if (emp) n_empty++;
    if (ok) n_ok++;
    if (conv && k < lim) n_conv++;
    if (!conv) n_limit++;
    if (a3) n_a3++; else n_a2++;
    // Leave the response visible for its one cycle unless the next request
    // follows at once; the next issue() then stalls on the busy decoder.
  endtask

  task automatic mer_pass(input string phase);
    bit ok;
    for (int a3 = 0; a3 < 2; a3++)
      for (int it = 1; it <= 4; it += 3) begin
        int err;
        err = 0;
        foreach (msgs[n]) begin
          retrieve(msgs[n], half_erased(), a3[0], it, ok);
          if (!ok) err++;
        end
        $display("%s: Arch %s, it=%0d: MER = %0d/%0d = %f", phase, a3 ? "III" : "II", it,
                 err, msgs.size(), real'(err) / msgs.size());
      end
  endtask

  initial begin
    bit ok;
    msg_t x;
    for (int a = 0; a < C; a++) for (int ja = 0; ja < L; ja++)
      for (int b = 0; b < C; b++) for (int jb = 0; jb < L; jb++) wref[a][ja][b][jb] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1. store at density 0.4
    for (int n = 0; n < 131; n++) begin
      x = rand_msg();
      msgs.push_back(x);
      learn(1, x);
    end
    // 2. retrieve with ce = 0.5
    mer_pass("stored 131, no deletion");
    // 3. delete half
    msgs.shuffle();
    while (msgs.size() > 66) begin
      x = msgs.pop_back();
      gone.push_back(x);
      learn(0, x);
    end
    mer_pass("deletion rate 0.5");
    // 4. update a quarter of the remaining messages
    for (int n = 0; n < 16; n++) begin
      x = msgs.pop_front();
      learn(0, x);
      x = rand_msg();
      learn(1, x);
      msgs.push_back(x);
    end
    mer_pass("after 16 updates");
    // 5. bounds, unknown messages, scattered erasures
    x = rand_msg();
    repeat (4) learn(1, x);
    repeat (4) learn(0, x);
    repeat (10) learn(0, gone[$urandom_range(0, gone.size() - 1)]);
    for (int n = 0; n < 20; n++) begin
      retrieve(rand_msg(), half_erased(), n[0], 4, ok);
    end
    // a store presented while a retrieval decodes waits for the decoder
    for (int n = 0; n < 4; n++) begin
      int s0;
      issue(OP_RETRIEVE, msgs[n], half_erased(), MODE_ARCH2, 4);
      s0 = n_stall;
      learn(1, rand_msg());
      checks++;
      if (n_stall - s0 != int'(rsp_iters)) begin
        failures++;
        $display("FAIL stall: %0d cycles, decoder ran %0d iterations", n_stall - s0, rsp_iters);
      end
    end
    for (int n = 0; n < 40; n++) begin
      msg_t e;
      for (int i = 0; i < C; i++) e[i] = KAPPA'($urandom_range(0, L - 1)) & KAPPA'($urandom_range(0, L - 1));
      retrieve(msgs[n], e, n[0], 1 + n % 4, ok);
    end

    $display("stores=%0d deletes=%0d sat=%0d floor=%0d arch2=%0d arch3=%0d conv_early=%0d at_limit=%0d ambiguous=%0d empty=%0d stalls=%0d unique_ok=%0d",
             n_store, n_delete, n_sat, n_floor, n_a2, n_a3, n_conv, n_limit, n_amb, n_empty, n_stall, n_ok);
    begin
      int cov [12];
      cov = '{n_store, n_delete, n_sat, n_floor, n_a2, n_a3, n_conv, n_limit, n_amb, n_empty, n_stall, n_ok};
      foreach (cov[k]) begin
        checks++;
        if (cov[k] == 0) begin
          failures++;
          $display("FAIL mechanism %0d never happened", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
