// tb_local_decoder: exhaustive check of local decoding for KAPPA = 4.
// Every sub-message value is tried with every erasure mask; the expected
// activation is worked out bit by bit, and the number of active nodes must
// be 2**(number of erased bits).
module tb_local_decoder;
  logic [3:0]  sub_msg, erase;
  logic [15:0] v;
  int checks = 0, failures = 0;

  local_decoder #(.KAPPA(4)) dut (.sub_msg(sub_msg), .erase(erase), .v(v));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 16; m++) begin
      for (int e = 0; e < 16; e++) begin
        logic [15:0] exp_v;
        sub_msg = 4'(m);
        erase   = 4'(e);
        #1;
        for (int j = 0; j < 16; j++) begin
          bit ok;
          ok = 1;
          for (int b = 0; b < 4; b++)
            if (!e[b] && (j[b] != m[b])) ok = 0;
          exp_v[j] = ok;
        end
        checks++;
        if (v !== exp_v) begin
          failures++;
          $display("FAIL msg=%h erase=%b v=%b exp=%b", m, e, v, exp_v);
        end
        checks++;
        if ($countones(v) != (1 << $countones(4'(e)))) begin
          failures++;
          $display("FAIL count msg=%h erase=%b v=%b", m, e, v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
