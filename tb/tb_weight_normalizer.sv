// tb_weight_normalizer: random weights at the default size; every output bit
// must be 1 exactly when its weight is at least 1.
module tb_weight_normalizer;
  localparam int C = 8, L = 16, NP = 28, WW = 2;
  logic [NP-1:0][L-1:0][L-1:0][WW-1:0] w;
  logic [NP-1:0][L-1:0][L-1:0]         psi;
  int checks = 0, failures = 0;

  weight_normalizer dut (.w(w), .psi(psi));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20; t++) begin
      for (int p = 0; p < NP; p++)
        for (int a = 0; a < L; a++)
          for (int b = 0; b < L; b++)
            w[p][a][b] = (t == 0) ? 2'd0 : (t == 1) ? 2'd3 : WW'($urandom_range(0, 3));
      #1;
      for (int p = 0; p < NP; p++)
        for (int a = 0; a < L; a++)
          for (int b = 0; b < L; b++) begin
            checks++;
            if (psi[p][a][b] !== (w[p][a][b] >= 1)) begin
              failures++;
              if (failures < 10) $display("FAIL p=%0d %0d %0d w=%0d psi=%b", p, a, b, w[p][a][b], psi[p][a][b]);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
