// tb_mer_sweep: the message-error-rate experiments of the source, run on two
// memories side by side that receive the same request stream: the default
// multiple-valued one (w_MAX = 3) and a binary one (w_MAX = 1).
//   A. density sweep, d = 0.1 .. 0.6, no deletion, ce = 0.5 (4 of 8 clusters
//      erased), Architecture II with 1 and 4 iterations;
//   B. deletion-rate sweep at d = 0.4 (131 messages), rate 0 .. 0.9,
//      Architecture II with 1 and 4 iterations and Architecture III with 4.
// Up to 100 surviving messages are retrieved per point. Checks:
//   - with no deletion both memories hold the same normalised connections, so
//     every retrieval must give identical activations in both;
//   - the error rate rises with density (d = 0.6 worse than d = 0.1);
//   - from deletion rate 0.3 to 0.7, the multiple-valued memory has a lower
//     error rate than the binary one (4 iterations);
//   - with multiple-valued weights the error rate at deletion 0.9 is below
//     that at deletion 0 (deletion also lowers the density).
// The error-rate tables are printed.
module tb_mer_sweep;
  import scn_pkg::*;

  localparam int C = 8, KAPPA = 4, L = 16;
  typedef logic [C-1:0][KAPPA-1:0] msg_t;

  logic       clk = 0, rst_n = 0;
  logic       cmd_valid = 0;
  op_e        cmd_op = OP_STORE;
  msg_t       cmd_msg = '0, cmd_erase = '0;
  mode_e      cmd_mode = MODE_ARCH2;
  logic [3:0] cmd_max_iter = 4'd1;
  logic       rdy3, rdy1, clp3, clp1, val3, val1, cnv3, cnv1;
  msg_t       msg3, msg1;
  logic [C-1:0][L-1:0] nod3, nod1;
  logic [C-1:0] amb3, amb1, emp3, emp1;
  logic [3:0] it3, it1;

  mv_scn dut3 (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(rdy3), .cmd_op(cmd_op),
    .cmd_msg(cmd_msg), .cmd_erase(cmd_erase), .cmd_mode(cmd_mode), .cmd_max_iter(cmd_max_iter),
    .upd_clamped(clp3), .rsp_valid(val3), .rsp_msg(msg3), .rsp_nodes(nod3),
    .rsp_ambiguous(amb3), .rsp_empty(emp3), .rsp_iters(it3), .rsp_converged(cnv3));

  mv_scn #(.WMAX(1)) dut1 (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(rdy1), .cmd_op(cmd_op),
    .cmd_msg(cmd_msg), .cmd_erase(cmd_erase), .cmd_mode(cmd_mode), .cmd_max_iter(cmd_max_iter),
    .upd_clamped(clp1), .rsp_valid(val1), .rsp_msg(msg1), .rsp_nodes(nod1),
    .rsp_ambiguous(amb1), .rsp_empty(emp1), .rsp_iters(it1), .rsp_converged(cnv1));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit got3, got1, ok3, ok1;
  logic [C-1:0][L-1:0] fin3, fin1;
  msg_t expect_msg;

  always @(posedge clk) begin
    if (val3) begin
      got3 <= 1; fin3 <= nod3;
      ok3  <= !(|amb3) && !(|emp3) && (msg3 == expect_msg);
    end
    if (val1) begin
      got1 <= 1; fin1 <= nod1;
      ok1  <= !(|amb1) && !(|emp1) && (msg1 == expect_msg);
    end
  end

  initial begin
    #100ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  // Both memories are idle whenever a request is presented, so one cycle of
  // cmd_valid is accepted by both.
  task automatic send(input op_e op, input msg_t m, input msg_t e, input mode_e md, input int it);
    @(negedge clk);
    cmd_op = op; cmd_msg = m; cmd_erase = e; cmd_mode = md; cmd_max_iter = 4'(it);
    cmd_valid = 1;
    if (!rdy3 || !rdy1) begin failures++; $display("FAIL memory not ready"); end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic retrieve(input msg_t m, input mode_e md, input int it, input bit same,
                          output bit r3, output bit r1);
    int n;
    expect_msg = m;
    got3 = 0; got1 = 0;
    send(OP_RETRIEVE, m, half_erased(), md, it);
    n = 0;
    while (!(got3 && got1) && n < 50) begin @(negedge clk); n++; end
    r3 = ok3; r1 = ok1;
    if (same) begin
      checks++;
      if (fin3 != fin1) begin failures++; $display("FAIL no-deletion results differ"); end
    end
  endtask

  task automatic restart();
    @(negedge clk); rst_n = 0;
    @(negedge clk); @(negedge clk); rst_n = 1;
  endtask

  initial begin
    real  merA [6][2];
    real  merB [10][3];
    msg_t ms [$];
    bit   r3, r1;
    repeat (2) @(negedge clk);

    // A. density sweep
    $display("density  messages  MER(II,it=1)  MER(II,it=4)   [w_MAX=3 = w_MAX=1 without deletion]");
    for (int di = 0; di < 6; di++) begin
      real d;
      int  m, nr;
      d = 0.1 * (di + 1);
      m = int'($ceil($ln(1.0 - d) / $ln(1.0 - 1.0 / 256.0)));
      restart();
      ms.delete();
      for (int k = 0; k < m; k++) begin ms.push_back(rand_msg()); send(OP_STORE, ms[k], '0, MODE_ARCH2, 1); end
      nr = (m < 100) ? m : 100;
      for (int c = 0; c < 2; c++) begin
        int err;
        err = 0;
        for (int k = 0; k < nr; k++) begin
          retrieve(ms[k], MODE_ARCH2, c ? 4 : 1, 1, r3, r1);
          if (!r3) err++;
        end
        merA[di][c] = real'(err) / nr;
      end
      $display("  %3.1f    %4d      %6.3f        %6.3f", d, m, merA[di][0], merA[di][1]);
    end
    checks++;
    if (!(merA[5][1] > merA[0][1])) begin failures++; $display("FAIL MER does not rise with density"); end

    // B. deletion sweep at density 0.4
    $display("deletion  w3:II,1  w3:II,4  w3:III,4  w1:II,1  w1:II,4  w1:III,4");
    for (int ri = 0; ri < 10; ri++) begin
      int   ndel, nr;
      real  e3 [3], e1 [3];
      restart();
      ms.delete();
      for (int k = 0; k < 131; k++) begin ms.push_back(rand_msg()); send(OP_STORE, ms[k], '0, MODE_ARCH2, 1); end
      ms.shuffle();
      ndel = int'(0.1 * ri * 131 + 0.5);
      for (int k = 0; k < ndel; k++) send(OP_DELETE, ms.pop_back(), '0, MODE_ARCH2, 1);
      nr = (ms.size() < 100) ? ms.size() : 100;
      for (int c = 0; c < 3; c++) begin
        int err3, err1;
        err3 = 0; err1 = 0;
        for (int k = 0; k < nr; k++) begin
          retrieve(ms[k], (c == 2) ? MODE_ARCH3 : MODE_ARCH2, (c == 0) ? 1 : 4, ndel == 0, r3, r1);
          if (!r3) err3++;
          if (!r1) err1++;
        end
        e3[c] = real'(err3) / nr;
        e1[c] = real'(err1) / nr;
        merB[ri][c] = e3[c];
      end
      $display("  %3.1f     %6.3f   %6.3f   %6.3f    %6.3f   %6.3f   %6.3f",
               0.1 * ri, e3[0], e3[1], e3[2], e1[0], e1[1], e1[2]);
      if (ri >= 3 && ri <= 7) begin
        checks++;
        if (!(e3[1] < e1[1])) begin failures++; $display("FAIL binary not worse at deletion %3.1f", 0.1 * ri); end
      end
    end
    checks++;
    if (!(merB[9][1] < merB[0][1])) begin failures++; $display("FAIL MER does not fall at high deletion"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
