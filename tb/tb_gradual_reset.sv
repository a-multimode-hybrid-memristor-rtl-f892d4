// tb_gradual_reset: synaptic-style gradual RESET through the analog pads.
//
// One complementary cell is formed and written in the digital mode, which
// leaves its left device in the low-resistance state. The chip is then put in
// the analog mode with word line 0 on pad B (gate voltage), the left device's
// source line on pad A and its bit line grounded, and 15,000 RESET pulses of
// 1 V are applied on pad A. Every 1,500 pulses the resistance is measured
// with 0.1 V on pad A and compared with the device law
//   R(n+1) = R(n) + (R_HRS - R(n)) * ((1.0 - 0.8) / (2.0 - 0.8))^5
// worked out here. The resistance must rise at every measurement. Pulse
// width is not modelled; each pulse acts once.
module tb_gradual_reset;
  import mm_pkg::*;
  localparam int unsigned ROWS = 64, COLS = 64, NDC = 128;
  localparam int unsigned NPULSES = 15000;
  localparam real K_LRS = 5.0e3, VT = 0.5, R_HRS = 1.0e5, V_WL = 1.5;

  logic clk = 0, rst_n, mode_req, start, side, wdata, busy, done;
  logic sr_shift, sr_in_wl, sr_in_bl, sr_in_sl, sr_out_wl, sr_out_bl, sr_out_sl;
  mode_e mode;
  op_e op;
  logic [5:0] row, col;
  logic [COLS-1:0] xnor_vec, rdata;
  logic [15:0] pulse_cycles;
  real v_wl, v_bl, v_sl;
  real pad_v [2];
  real pad_i [2];

  memristor_platform dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_op(input op_e o, input logic w);
    op = o; row = 0; col = 0; side = 0; wdata = w; xnor_vec = '1; pulse_cycles = 16'd2;
    start = 1;
    @(posedge clk); #1;
    start = 0;
    while (!done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
  endtask

  initial begin
    real r_exp, r_meas, r_prev, f;
    rst_n = 0; mode_req = 0; start = 0; op = OP_READ; row = 0; col = 0; side = 0;
    wdata = 0; xnor_vec = '1; pulse_cycles = 1;
    sr_shift = 0; sr_in_wl = 0; sr_in_bl = 0; sr_in_sl = 0;
    pad_v[0] = 0.0; pad_v[1] = 0.0;
    v_wl = V_WL; v_bl = 3.0; v_sl = 0.0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    do_op(OP_FORM, 0);
    v_bl = 1.5; v_sl = 2.0;
    do_op(OP_WRITE, 1);          // left device low-resistance
    do_op(OP_READ, 0);
    checks++;
    if (rdata[0] !== 1'b1) begin failures++; $display("FAIL cell not written"); end
    // configuration: WL0 -> pad B, SL of device column 0 -> pad A, rest ground
    for (int i = 0; i < NDC; i++)
      for (int b = 0; b < 2; b++) begin
        logic [1:0] wc, sc;
        sc = (i == 0) ? 2'(LINE_PAD_A) : 2'(LINE_GND);
        wc = (i == NDC - ROWS) ? 2'(LINE_PAD_B) : 2'(LINE_GND);
        sr_shift = 1; sr_in_sl = sc[b]; sr_in_bl = 1'b0; sr_in_wl = wc[b];
        @(posedge clk); #1;
      end
    sr_shift = 0;
    mode_req = 1;
    while (mode != MODE_ANALOG) begin @(posedge clk); #1; end
    f = (0.2 / 1.2) ** 5.0;
    r_exp = K_LRS / (V_WL - VT);
    r_prev = 0.0;
    for (int p = 0; p <= int'(NPULSES); p++) begin
      if (p % 1500 == 0) begin
        pad_v[1] = V_WL; pad_v[0] = 0.1;
        #1;
        r_meas = 0.1 / pad_i[0];
        pad_v[0] = 0.0; pad_v[1] = 0.0;
        #1;
        $display("pulses %0d: %0.1f ohm (expected %0.1f)", p, r_meas, r_exp);
        checks++;
        if (r_meas - r_exp > 1e-6 * r_exp || r_exp - r_meas > 1e-6 * r_exp) begin
          failures++;
          $display("FAIL resistance off the device law");
        end
        checks++;
        if (p > 0 && !(r_meas > r_prev)) begin
          failures++;
          $display("FAIL resistance did not rise");
        end
        r_prev = r_meas;
      end
      if (p < int'(NPULSES)) begin
        pad_v[1] = V_WL; pad_v[0] = 1.0;
        #1;
        pad_v[0] = 0.0; pad_v[1] = 0.0;
        #1;
        r_exp = r_exp + (R_HRS - r_exp) * f;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
