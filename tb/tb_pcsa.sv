// tb_pcsa: precharge sense amplifier with XNOR.
// Checks the precharge state (both outputs high), the resolved bit for both
// orderings of the conductances, the XNOR with the input bit for all four
// combinations, that the outputs hold while se stays high, and that nearly
// equal conductances give both answers over many reads.
module tb_pcsa;
  logic se, xnor_in, q, qb;
  real g_bl, g_blb;
  int checks = 0, failures = 0;

  pcsa #(.G_OFFSET(1.0e-6)) dut (.se, .g_bl, .g_blb, .xnor_in, .q, .qb);

  task automatic chk(input logic got, input logic exp_v, input string what);
    checks++;
    if (got !== exp_v) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp_v);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    se = 0; xnor_in = 1;
    g_bl = 1.0/5e3; g_blb = 1.0/1e5;
    #5 chk(q, 1, "precharge q"); chk(qb, 1, "precharge qb");
    for (int b = 0; b < 2; b++)
      for (int x = 0; x < 2; x++) begin
        if (b == 1) begin g_bl = 1.0/5e3; g_blb = 1.0/1e5; end
        else        begin g_bl = 1.0/1e5; g_blb = 1.0/5e3; end
        xnor_in = x[0];
        se = 0; #5;
        chk(q & qb, 1, "precharged");
        se = 1; #5;
        chk(q, ~(b[0] ^ x[0]), "xnor q");
        chk(qb, b[0] ^ x[0], "xnor qb");
        // outputs hold while se high even if the inputs change
        g_bl = g_blb; xnor_in = ~xnor_in; #5;
        chk(q, ~(b[0] ^ x[0]), "hold");
      end
    // closed window: both results must occur
    ones = 0;
    g_bl = 1.0/5e3; g_blb = 1.0/5e3 + 1e-8; xnor_in = 1;
    for (int i = 0; i < 200; i++) begin
      se = 0; #2; se = 1; #2;
      ones += q;
    end
    checks++;
    if (ones == 0 || ones == 200) begin
      failures++;
      $display("FAIL closed window always gives %0d", q);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
