// tb_wta: random per-node scores around the threshold (sigma = 8) with many
// ties; the winners are recomputed by a model and compared.
module tb_wta;
  localparam int C = 8, L = 16, SW = 4;
  logic [C-1:0][L-1:0][SW-1:0] s;
  logic [C-1:0][L-1:0]         v_next;
  int checks = 0, failures = 0, n_below = 0, n_tie = 0;

  wta dut (.s(s), .v_next(v_next));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < C; i++)
        for (int j = 0; j < L; j++)
          s[i][j] = (t % 3 == 0) ? SW'($urandom_range(0, 15)) : (i == 0) ? SW'($urandom_range(0, 8)) : SW'($urandom_range(6, 9));
      #1;
      for (int i = 0; i < C; i++) begin
        int mx, nw;
        mx = -1; nw = 0;
        for (int j = 0; j < L; j++) if (int'(s[i][j]) > mx) mx = s[i][j];
        if (mx < 8) n_below++;
        for (int j = 0; j < L; j++) begin
          bit e;
          e = (int'(s[i][j]) == mx) && (mx >= 8);
          nw += e;
          checks++;
          if (v_next[i][j] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL c%0d n%0d s=%0d max=%0d got %b", i, j, s[i][j], mx, v_next[i][j]);
          end
        end
        if (nw > 1) n_tie++;
      end
    end
    checks++;
    if (n_below == 0 || n_tie == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
