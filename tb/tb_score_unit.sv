// tb_score_unit: random symmetric connection matrices and activations at the
// default size (8 x 16 nodes); every node's score is recomputed from the
// full matrix by the reference model and compared.
module tb_score_unit;
  import scn_ref_pkg::*;
  psi_vec_t psi;
  act_vec_t v;
  logic [C-1:0][L-1:0][3:0] s;
  int checks = 0, failures = 0;

  score_unit dut (.psi(psi), .v(v), .s(s));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    conn_t cn;
    act_t  va;
    for (int t = 0; t < 40; t++) begin
      int dens;
      dens = (t == 0) ? 100 : $urandom_range(5, 60);
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
          va[i][j] = (t == 0) ? 1 : ($urandom_range(0, 99) < 30);
      psi = conn_to_psi(cn);
      v   = pack_act(va);
      #1;
      for (int i = 0; i < C; i++)
        for (int j = 0; j < L; j++) begin
          checks++;
          if (int'(s[i][j]) != score(cn, va, i, j)) begin
            failures++;
            if (failures < 10) $display("FAIL t%0d node %0d,%0d s=%0d exp=%0d", t, i, j, s[i][j], score(cn, va, i, j));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
