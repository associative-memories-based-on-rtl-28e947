// tb_node_encoder: random activations with 0, 1 or several active nodes per
// cluster; index, ambiguity and empty flags are compared with a model.
module tb_node_encoder;
  localparam int C = 8, KAPPA = 4, L = 16;
  logic [C-1:0][L-1:0]     v;
  logic [C-1:0][KAPPA-1:0] msg;
  logic [C-1:0]            amb, emp;
  int checks = 0, failures = 0;
  int n_amb = 0, n_emp = 0, n_one = 0;

  node_encoder dut (.v(v), .msg(msg), .ambiguous(amb), .empty(emp));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < C; i++) begin
        int k;
        k = $urandom_range(0, 3);
        v[i] = '0;
        for (int n = 0; n < k; n++) v[i][$urandom_range(0, L - 1)] = 1'b1;
      end
      #1;
      for (int i = 0; i < C; i++) begin
        int cnt, lo;
        cnt = 0; lo = 0;
        for (int j = L - 1; j >= 0; j--) if (v[i][j]) begin cnt++; lo = j; end
        if (cnt == 0) n_emp++; else if (cnt == 1) n_one++; else n_amb++;
        checks++;
        if (amb[i] !== (cnt > 1) || emp[i] !== (cnt == 0) || msg[i] !== KAPPA'(lo)) begin
          failures++;
          $display("FAIL cluster %0d v=%b msg=%0d amb=%b emp=%b", i, v[i], msg[i], amb[i], emp[i]);
        end
      end
    end
    checks++;
    if (n_amb == 0 || n_emp == 0 || n_one == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
