// tb_endurance_study: endurance experiment on one complementary cell.
//
// The cell is programmed over and over in the digital mode, alternating 1 and
// 0, and read back with the sense amplifiers after every write. Every 25
// program cycles the chip is put in the analog mode and the resistance of the
// left device, just reset by writing 0, is measured through analog pad A.
// The device wear-out limit is lowered to 200 cycles (ENDURANCE) so that the
// end of life is reached in simulation; the default is 1e9. Checked: no bit
// errors and a high measured resistance before the limit; a collapsed
// resistance window and bit errors after it.
module tb_endurance_study;
  import mm_pkg::*;
  localparam int unsigned ROWS = 64, COLS = 64, NDC = 128;
  localparam longint unsigned ENDURANCE = 200;
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

  memristor_platform #(.ENDURANCE(ENDURANCE)) dut (.*);

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

  task automatic load_config();
    // word line 0 to pad B, bit line of device column 0 to pad A, rest ground
    for (int i = 0; i < NDC; i++)
      for (int b = 0; b < 2; b++) begin
        logic [1:0] wc, bc;
        bc = (i == 0) ? 2'(LINE_PAD_A) : 2'(LINE_GND);
        wc = (i == NDC - ROWS) ? 2'(LINE_PAD_B) : 2'(LINE_GND);
        sr_shift = 1; sr_in_bl = bc[b]; sr_in_sl = 1'b0; sr_in_wl = wc[b];
        @(posedge clk); #1;
      end
    sr_shift = 0;
  endtask

  task automatic set_mode(input logic analog);
    mode_req = analog;
    while (analog ? mode != MODE_ANALOG : mode != MODE_DIGITAL) begin @(posedge clk); #1; end
  endtask

  initial begin
    int errors_before, errors_after;
    real r_meas;
    rst_n = 0; mode_req = 0; start = 0; op = OP_READ; row = 0; col = 0; side = 0;
    wdata = 0; xnor_vec = '1; pulse_cycles = 1;
    sr_shift = 0; sr_in_wl = 0; sr_in_bl = 0; sr_in_sl = 0;
    pad_v[0] = 0.0; pad_v[1] = 0.0;
    v_wl = V_WL; v_bl = 3.0; v_sl = 0.0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    do_op(OP_FORM, 0);
    v_bl = 1.5; v_sl = 2.0;
    load_config();   // the chains only act in the analog mode
    errors_before = 0; errors_after = 0;
    for (int cyc = 1; cyc <= 300; cyc++) begin
      for (int b = 1; b >= 0; b--) begin
        do_op(OP_WRITE, b[0]);
        do_op(OP_READ, 0);
        if (rdata[0] !== b[0]) begin
          if (cyc < int'(ENDURANCE)) errors_before++;
          else errors_after++;
        end
      end
      if (cyc % 25 == 0) begin
        set_mode(1);
        pad_v[1] = V_WL; pad_v[0] = 0.1;
        #1;
        r_meas = 0.1 / pad_i[0];
        pad_v[0] = 0.0; pad_v[1] = 0.0;
        set_mode(0);
        $display("cycle %0d: left device after writing 0: %0.0f ohm", cyc, r_meas);
        checks++;
        if (cyc < int'(ENDURANCE) && r_meas < 0.9 * R_HRS) begin
          failures++;
          $display("FAIL resistance window closed early");
        end
        if (cyc > int'(ENDURANCE) && r_meas > 2.0 * K_LRS / (V_WL - VT)) begin
          failures++;
          $display("FAIL device did not wear out");
        end
      end
    end
    $display("bit errors before wear-out %0d, after %0d", errors_before, errors_after);
    checks++;
    if (errors_before != 0) begin failures++; $display("FAIL errors before wear-out"); end
    checks++;
    if (errors_after == 0) begin failures++; $display("FAIL no bit errors after wear-out"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
