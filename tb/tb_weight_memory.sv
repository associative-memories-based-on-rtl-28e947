// tb_weight_memory: random stores and deletes of messages drawn from a small
// alphabet, so that cliques share connections and weights hit both bounds.
// A reference array of integer weights (full C x C x L x L, saturating at 0
// and 3) is kept alongside; after every operation the whole weight port and
// the clamp flag are compared with it. Each operation must take effect at the
// next clock edge.
module tb_weight_memory;
  localparam int C = 8, KAPPA = 4, L = 16, NP = 28, WMAX = 3;
  logic clk = 0, rst_n = 0, add = 0, del = 0;
  logic [C-1:0][KAPPA-1:0] idx;
  logic [NP-1:0][L-1:0][L-1:0][1:0] w;
  logic clamp;
  int ref_w [C][C][L][L];
  int checks = 0, failures = 0, n_sat = 0, n_floor = 0, n_add = 0, n_del = 0;

  weight_memory dut (.clk(clk), .rst_n(rst_n), .add(add), .del(del), .idx(idx), .w(w), .clamp(clamp));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all(input string what);
    int p, bad;
    p = 0; bad = 0;
    for (int a = 0; a < C; a++)
      for (int b = a + 1; b < C; b++) begin
        for (int ja = 0; ja < L; ja++)
          for (int jb = 0; jb < L; jb++)
            if (int'(w[p][ja][jb]) != ref_w[a][b][ja][jb]) bad++;
        p++;
      end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %s: %0d weights differ", what, bad);
    end
  endtask

  initial begin
    for (int a = 0; a < C; a++) for (int b = 0; b < C; b++)
      for (int ja = 0; ja < L; ja++) for (int jb = 0; jb < L; jb++) ref_w[a][b][ja][jb] = 0;
    idx = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    compare_all("after reset");
    for (int t = 0; t < 400; t++) begin
      bit is_add, exp_clamp;
      is_add = (t < 40) ? 1 : ($urandom_range(0, 99) < 55);
      for (int i = 0; i < C; i++) idx[i] = KAPPA'($urandom_range(0, (t % 50 < 25) ? 1 : 15));
      exp_clamp = 0;
      for (int a = 0; a < C; a++)
        for (int b = a + 1; b < C; b++) begin
          if (is_add && ref_w[a][b][idx[a]][idx[b]] == WMAX) exp_clamp = 1;
          if (!is_add && ref_w[a][b][idx[a]][idx[b]] == 0) exp_clamp = 1;
        end
      add = is_add; del = !is_add;
      #1;
      checks++;
      if (clamp !== exp_clamp) begin
        failures++;
        $display("FAIL clamp t=%0d got %b exp %b", t, clamp, exp_clamp);
      end
      if (exp_clamp && is_add) n_sat++;
      if (exp_clamp && !is_add) n_floor++;
      if (is_add) n_add++; else n_del++;
      compare_all("before edge");
      @(posedge clk);
      for (int a = 0; a < C; a++)
        for (int b = a + 1; b < C; b++) begin
          if (is_add && ref_w[a][b][idx[a]][idx[b]] < WMAX) ref_w[a][b][idx[a]][idx[b]]++;
          if (!is_add && ref_w[a][b][idx[a]][idx[b]] > 0) ref_w[a][b][idx[a]][idx[b]]--;
        end
      #1 add = 0; del = 0;
      compare_all("after edge");
    end
    // add and del together leave every weight alone
    add = 1; del = 1;
    @(posedge clk);
    #1 add = 0; del = 0;
    compare_all("add+del");
    checks++;
    if (n_sat == 0 || n_floor == 0 || n_add == 0 || n_del == 0) begin
      failures++;
      $display("FAIL coverage sat=%0d floor=%0d", n_sat, n_floor);
    end
    $display("stores=%0d deletes=%0d saturated=%0d floored=%0d", n_add, n_del, n_sat, n_floor);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
