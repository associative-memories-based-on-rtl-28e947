// tb_and_or_unit: random symmetric connection matrices and activations at the
// default size (8 x 16 nodes); the next activation of every node is
// recomputed from the full matrix by the reference model and compared.
module tb_and_or_unit;
  import scn_ref_pkg::*;
  psi_vec_t psi;
  act_vec_t v, vn;
  int checks = 0, failures = 0, n_kept = 0, n_dropped = 0;

  and_or_unit dut (.psi(psi), .v(v), .v_next(vn));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    conn_t cn;
    act_t  va, exp_v;
    for (int t = 0; t < 60; t++) begin
      int dens;
      dens = (t == 0) ? 100 : $urandom_range(5, 90);
      for (int a = 0; a < C; a++)
        for (int ja = 0; ja < L; ja++)
          for (int b = 0; b < C; b++)
            for (int jb = 0; jb < L; jb++)
              cn[a][ja][b][jb] = 0;
      for (int a = 0; a < C; a++)
        for (int b = a + 1; b < C; b++)
          for (int ja = 0; ja < L; ja++)
            for (int jb = 0; jb < L; jb++) begin
              bit x;
              x = ($urandom_range(0, 99) < dens);
              cn[a][ja][b][jb] = x;
              cn[b][jb][a][ja] = x;
            end
      for (int i = 0; i < C; i++)
        for (int j = 0; j < L; j++)
          va[i][j] = (t == 0) ? 1 : ($urandom_range(0, 99) < 20);
      psi = conn_to_psi(cn);
      v   = pack_act(va);
      #1;
      exp_v = step_arch3(cn, va);
      for (int i = 0; i < C; i++)
        for (int j = 0; j < L; j++) begin
          checks++;
          if (va[i][j] && exp_v[i][j]) n_kept++;
          if (va[i][j] && !exp_v[i][j]) n_dropped++;
          if (vn[i][j] !== exp_v[i][j]) begin
            failures++;
            if (failures < 10) $display("FAIL t%0d node %0d,%0d got %b exp %b", t, i, j, vn[i][j], exp_v[i][j]);
          end
        end
    end
    checks++;
    if (n_kept == 0 || n_dropped == 0) begin
      failures++;
      $display("FAIL coverage kept=%0d dropped=%0d", n_kept, n_dropped);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
