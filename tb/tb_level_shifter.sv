// tb_level_shifter: the output follows the rail when the input is high,
// sits at 0 V when it is low, and tracks rail changes; with a propagation
// delay the new level appears only after it.
module tb_level_shifter;
  logic in;
  real vddh, out0, out5;
  int checks = 0, failures = 0;

  level_shifter #(.T_PD(0)) dut0 (.in, .vddh, .out(out0));
  level_shifter #(.T_PD(5)) dut5 (.in, .vddh, .out(out5));

  task automatic check(input real got, input real exp_v, input string what);
    checks++;
    if (got > exp_v + 1e-9 || got < exp_v - 1e-9) begin
      failures++;
      $display("FAIL %s got %f exp %f", what, got, exp_v);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = 1'b0; vddh = 3.3;
    #10 check(out0, 0.0, "low");
    in = 1'b1;
    #1 check(out0, 3.3, "high");
    check(out5, 0.0, "delayed still low");
    #5 check(out5, 3.3, "delayed high");
    vddh = 4.5;
    #1 check(out0, 4.5, "rail change");
    #5 check(out5, 4.5, "rail change delayed");
    in = 1'b0;
    #1 check(out0, 0.0, "back low");
    #5 check(out5, 0.0, "back low delayed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
