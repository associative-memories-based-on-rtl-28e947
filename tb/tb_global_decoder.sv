// tb_global_decoder: iterative decoding against the reference model.
// A connection matrix is built from random stored cliques (about density
// 0.3-0.5); stored messages with half of their clusters erased are decoded
// with both rules and iteration limits 0..5. The final activations, the
// iteration count, the convergence flag and the latency (done in the cycle
// after the k-th edge following the start edge, for k iterations) are checked. Counts that early
// convergence, stopping at the limit and an ambiguous result each happened.
module tb_global_decoder;
  import scn_pkg::*;
  import scn_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  act_vec_t v_in, v;
  mode_e    mode;
  logic [3:0] max_iter, iters;
  psi_vec_t psi;
  logic busy, done, converged;
  int checks = 0, failures = 0;
  int n_conv = 0, n_limit = 0, n_amb = 0, n_a2 = 0, n_a3 = 0;

  global_decoder dut (.clk(clk), .rst_n(rst_n), .start(start), .v_in(v_in), .mode(mode),
                      .max_iter(max_iter), .psi(psi), .busy(busy), .done(done), .v(v),
                      .iters(iters), .converged(converged));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    conn_t cn;
    msg_t  stored [200];
    for (int a = 0; a < C; a++) for (int ja = 0; ja < L; ja++)
      for (int b = 0; b < C; b++) for (int jb = 0; jb < L; jb++) cn[a][ja][b][jb] = 0;
    for (int m = 0; m < 120; m++) begin
      for (int i = 0; i < C; i++) stored[m][i] = KAPPA'($urandom_range(0, L - 1));
      for (int a = 0; a < C; a++) for (int b = 0; b < C; b++)
        if (a != b) cn[a][stored[m][a]][b][stored[m][b]] = 1;
    end
    psi = conn_to_psi(cn);
    mode = MODE_ARCH2; max_iter = 4'd1; v_in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 240; t++) begin
      act_t  va, vr, vnx;
      msg_t  er;
      int    lim, k, cyc;
      bit    conv, a3;
      int    pick [C];
      // erase 4 random clusters
      er = '0;
      for (int i = 0; i < C; i++) pick[i] = i;
      pick.shuffle();
      for (int n = 0; n < 4; n++) er[pick[n]] = '1;
      va  = local_dec(stored[t % 120], er);
      a3  = t[0];
      lim = t % 6;
      // reference
      vr = va; k = 0; conv = 0;
      while (1) begin
        vnx = a3 ? step_arch3(cn, vr) : step_arch2(cn, vr);
        k++;
        conv = act_eq(vnx, vr);
        vr = vnx;
        if (conv || k >= ((lim == 0) ? 1 : lim)) break;
      end
      // drive
      v_in = pack_act(va); mode = a3 ? MODE_ARCH3 : MODE_ARCH2; max_iter = 4'(lim);
      start = 1;
      @(posedge clk);
      #1 start = 0;
      cyc = 0;
      while (!done && cyc < 40) begin
        checks++;
        if (!busy) begin failures++; $display("FAIL busy low while iterating"); end
        @(posedge clk); #1 cyc++;
      end
      checks++;
      if (cyc != k) begin
        failures++;
        $display("FAIL latency t=%0d: done %0d edges after start edge, expected %0d", t, cyc, k);
      end
      checks++;
      if (!act_eq(unpack_act(v), vr) || int'(iters) != k || converged !== conv) begin
        failures++;
        $display("FAIL t=%0d mode=%0d lim=%0d iters=%0d/%0d conv=%b/%b", t, a3, lim, iters, k, converged, conv);
      end
      checks++;
      if (busy) begin failures++; $display("FAIL busy high during done"); end
      if (conv && k < lim) n_conv++;
      if (!conv) n_limit++;
      for (int i = 0; i < C; i++) begin
        int cnt; cnt = 0;
        for (int j = 0; j < L; j++) cnt += vr[i][j];
        if (cnt > 1) begin n_amb++; break; end
      end
      if (a3) n_a3++; else n_a2++;
      if (t % 3 != 0) begin
        // leave one idle cycle: done must drop
        @(posedge clk); #1;
        checks++;
        if (busy || done) begin failures++; $display("FAIL busy/done after done"); end
      end
    end
    $display("converged early=%0d stopped at limit=%0d ambiguous=%0d arch2=%0d arch3=%0d",
             n_conv, n_limit, n_amb, n_a2, n_a3);
    checks++;
    if (n_conv == 0 || n_limit == 0 || n_amb == 0 || n_a2 == 0 || n_a3 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
