// tb_mode_ctrl: mode switching with break before make.
// Checks the reset state, the two-cycle synchroniser plus BBM_CYCLES
// disconnected cycles on the way to analog and back, that a request made
// while the digital controller is busy waits for it, and that the digital and
// analog sides are never connected together.
module tb_mode_ctrl;
  import mm_pkg::*;
  localparam int unsigned BBM = 4;
  logic clk = 0, rst_n, mode_req, dig_busy, dig_active, ana_active;
  mode_e mode;
  int checks = 0, failures = 0;

  mode_ctrl #(.BBM_CYCLES(BBM)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (dig_active && ana_active) begin failures++; $display("FAIL both active"); end
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (mode %s)", what, mode.name()); end
  endtask

  // Count cycles from a request change until the target side is active.
  task automatic expect_switch(input logic to_analog, input int exp_cycles);
    int n = 0;
    while (!(to_analog ? ana_active : dig_active) && n < 100) begin
      if (n > 2) chk(!dig_active && !ana_active, "disconnected while switching");
      @(posedge clk); #1;
      n++;
    end
    checks++;
    if (n != exp_cycles) begin
      failures++;
      $display("FAIL switch took %0d cycles, expected %0d", n, exp_cycles);
    end
  endtask

  initial begin
    rst_n = 0; mode_req = 0; dig_busy = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    chk(dig_active && !ana_active && mode == MODE_DIGITAL, "reset state");
    // digital -> analog: 2 synchroniser cycles, 1 to leave, then BBM cycles
    // disconnected
    mode_req = 1;
    expect_switch(1, 3 + BBM);
    chk(mode == MODE_ANALOG, "analog reached");
    // analog -> digital
    mode_req = 0;
    expect_switch(0, 3 + BBM);
    chk(mode == MODE_DIGITAL, "digital reached");
    // request while busy waits
    dig_busy = 1;
    mode_req = 1;
    repeat (10) begin
      @(posedge clk); #1;
      chk(dig_active, "stays digital while busy");
    end
    dig_busy = 0;
    expect_switch(1, 1 + BBM);
    chk(ana_active, "analog after busy released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
