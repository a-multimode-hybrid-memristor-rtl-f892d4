// tb_memristor_platform: end-to-end test of the die at its default size
// (64 word lines x 64 complementary cells = 8,192 memristors).
//
// Plays the part of the board microcontroller and of the pulse/measurement
// instrument on the analog pads:
//   1. digital mode: forms 8 rows of complementary cells with the bit-line
//      rail at the forming voltage, writes random words cell by cell at the
//      programming voltages, reads every row back (plain and XNOR reads) and
//      checks each operation's latency;
//   2. single-device SET and RESET pulses that flip a stored bit;
//   3. a mode request made while a long write runs, which must wait;
//   4. analog mode: loads the three configuration shift registers, measures
//      the resistance of chosen devices through the pads (LRS and HRS), applies
//      weak 1 V RESET pulses through a pad and follows the gradual resistance
//      rise, and checks that digital commands are refused;
//   5. back to digital mode and a read that sees the analog-mode change.
// Expected values come from a reference copy of the stored bits kept here and
// from the device law written out here. Each mechanism is counted and a
// mechanism that never happened counts as a failure.
module tb_memristor_platform;
  import mm_pkg::*;
  localparam int unsigned ROWS = 64, COLS = 64, NDC = 128;
  localparam int unsigned NROWS_USED = 8;
  localparam real K_LRS = 5.0e3, VT = 0.5, R_HRS = 1.0e5;
  localparam real V_WL = 1.5, V_FORM = 3.0, V_BL = 1.5, V_SL = 2.0;

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
  int n_form = 0, n_write = 0, n_read = 0, n_xnor = 0, n_set = 0, n_reset = 0;
  int n_to_analog = 0, n_to_digital = 0, n_deferred = 0, n_refused = 0;
  int n_measure = 0, n_weak_pulse = 0;

  logic [COLS-1:0] ref_word [NROWS_USED];

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string what);
    failures++;
    $display("FAIL %s", what);
  endtask

  // Issue one digital-mode command and wait for done; checks the latency.
  task automatic do_op(input op_e o, input int r, c, input logic s, w,
                       input logic [COLS-1:0] x, input int pw);
    int n, exp_n;
    op = o; row = 6'(r); col = 6'(c); side = s; wdata = w; xnor_vec = x;
    pulse_cycles = 16'(pw);
    start = 1;
    @(posedge clk); #1;
    start = 0;
    n = 1;
    while (!done && n < 100000) begin @(posedge clk); #1; n++; end
    case (o)
      OP_READ:          exp_n = 3;
      OP_SET, OP_RESET: exp_n = pw + 1;
      default:          exp_n = 2 * pw + 2;
    endcase
    checks++;
    if (n != exp_n) fail($sformatf("%s latency %0d, expected %0d", o.name(), n, exp_n));
    @(posedge clk); #1;
  endtask

  task automatic read_check(input int r, input logic [COLS-1:0] x, input string what);
    do_op(OP_READ, r, 0, 0, 0, x, 0);
    checks++;
    if (rdata !== ~(ref_word[r] ^ x))
      fail($sformatf("%s row %0d: %h, expected %h", what, r, rdata, ~(ref_word[r] ^ x)));
    if (x == '1) n_read++; else n_xnor++;
  endtask

  // Load the three configuration chains: word line wl_r to pad B, device
  // column dc's bit line to bl_code and its source line to sl_code, every
  // other line to ground. Line 0 goes in first, low bit first.
  task automatic load_config(input int wl_r, dc, input line_sel_e bl_code, sl_code);
    for (int i = 0; i < NDC; i++)
      for (int b = 0; b < 2; b++) begin
        logic [1:0] wc, bc, sc;
        wc = (i == wl_r) ? 2'(LINE_PAD_B) : 2'(LINE_GND);
        bc = (i == dc) ? 2'(bl_code) : 2'(LINE_GND);
        sc = (i == dc) ? 2'(sl_code) : 2'(LINE_GND);
        sr_shift = 1;
        sr_in_bl = bc[b];
        sr_in_sl = sc[b];
        sr_in_wl = wc[b];
        // the word-line chain is shorter: its bits go in last
        if (i < NDC - ROWS) sr_in_wl = 1'b0;
        else begin
          wc = ((i - (NDC - ROWS)) == wl_r) ? 2'(LINE_PAD_B) : 2'(LINE_GND);
          sr_in_wl = wc[b];
        end
        @(posedge clk); #1;
      end
    sr_shift = 0;
  endtask

  task automatic switch_mode(input logic analog);
    int n = 0;
    mode_req = analog;
    while ((analog ? mode != MODE_ANALOG : mode != MODE_DIGITAL) && n < 1000) begin
      @(posedge clk); #1; n++;
    end
    checks++;
    if (n >= 1000) fail("mode switch did not complete");
    if (analog) n_to_analog++; else n_to_digital++;
  endtask

  // Resistance of the configured device measured with 0.1 V on pad A.
  task automatic measure(output real r_meas);
    pad_v[0] = 0.1; pad_v[1] = V_WL;
    #1;
    r_meas = 0.1 / pad_i[0];
    pad_v[0] = 0.0; pad_v[1] = 0.0;
    #1;
    n_measure++;
  endtask

  function automatic logic close(input real a, input real b, input real rel);
    real d;
    d = a - b;
    if (d < 0) d = -d;
    return d <= rel * b;
  endfunction

  initial begin
    real r_meas, r_exp, f;
    logic [COLS-1:0] x;
    rst_n = 0; mode_req = 0; start = 0; op = OP_READ; row = 0; col = 0; side = 0;
    wdata = 0; xnor_vec = '1; pulse_cycles = 1;
    sr_shift = 0; sr_in_wl = 0; sr_in_bl = 0; sr_in_sl = 0;
    v_wl = V_WL; v_bl = V_FORM; v_sl = 0.0;
    pad_v[0] = 0.0; pad_v[1] = 0.0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;

    // ---- 1. forming, writing, reading ----
    for (int r = 0; r < NROWS_USED; r++)
      for (int c = 0; c < COLS; c++) begin
        do_op(OP_FORM, r, c, 0, 0, '1, 2);
        n_form++;
      end
    v_bl = V_BL; v_sl = V_SL;
    for (int r = 0; r < NROWS_USED; r++) begin
      ref_word[r] = {$urandom, $urandom};
      for (int c = 0; c < COLS; c++) begin
        do_op(OP_WRITE, r, c, 0, ref_word[r][c], '1, 1 + (c % 3));
        n_write++;
      end
    end
    for (int r = 0; r < NROWS_USED; r++) begin
      read_check(r, '1, "plain read");
      x = {$urandom, $urandom};
      read_check(r, x, "XNOR read");
    end
    checks++;
    if (pad_i[0] != 0.0 || pad_i[1] != 0.0) fail("pad current in digital mode");

    // ---- 2. single-device pulses: make cell (1, 5) hold 0 ----
    do_op(OP_WRITE, 1, 5, 0, 1'b1, '1, 2);
    ref_word[1][5] = 1'b1;
    read_check(1, '1, "before single-device pulses");
    do_op(OP_RESET, 1, 5, 1'b0, 0, '1, 2); n_reset++;
    do_op(OP_SET, 1, 5, 1'b1, 0, '1, 2);   n_set++;
    ref_word[1][5] = 1'b0;
    read_check(1, '1, "after single-device pulses");

    // ---- 3. mode request during a long write waits for it ----
    op = OP_WRITE; row = 6'd2; col = 6'd7; wdata = ~ref_word[2][7]; pulse_cycles = 16'd40;
    start = 1;
    @(posedge clk); #1;
    start = 0;
    mode_req = 1;
    while (!done) begin
      checks++;
      if (mode != MODE_DIGITAL) fail("mode changed while the controller was busy");
      @(posedge clk); #1;
    end
    n_deferred++;
    n_write++;
    ref_word[2][7] = ~ref_word[2][7];
    mode_req = 0;
    repeat (20) @(posedge clk);
    #1;
    read_check(2, '1, "after deferred switch");

    // ---- 4. analog mode ----
    // device (0, left of column 3): bit line to pad A, source line to ground
    load_config(0, 6, LINE_PAD_A, LINE_GND);
    switch_mode(1);
    measure(r_meas);
    r_exp = ref_word[0][3] ? K_LRS / (V_WL - VT) : R_HRS;
    checks++;
    if (!close(r_meas, r_exp, 1e-6))
      fail($sformatf("measured %g ohm, expected %g", r_meas, r_exp));
    // refused digital command
    op = OP_READ; start = 1;
    @(posedge clk); #1;
    start = 0;
    repeat (3) begin
      checks++;
      if (busy) fail("digital command accepted in analog mode");
      @(posedge clk); #1;
    end
    n_refused++;
    switch_mode(0);
    // partner device: right of column 3
    load_config(0, 7, LINE_PAD_A, LINE_GND);
    switch_mode(1);
    measure(r_meas);
    r_exp = ref_word[0][3] ? R_HRS : K_LRS / (V_WL - VT);
    checks++;
    if (!close(r_meas, r_exp, 1e-6))
      fail($sformatf("partner measured %g ohm, expected %g", r_meas, r_exp));
    switch_mode(0);

    // gradual RESET of the low-resistance device of cell (0, 4):
    // source line on pad A, bit line grounded, word line on pad B
    load_config(0, ref_word[0][4] ? 8 : 9, LINE_GND, LINE_PAD_A);
    switch_mode(1);
    measure(r_meas);
    r_exp = K_LRS / (V_WL - VT);
    checks++;
    if (!close(r_meas, r_exp, 1e-6)) fail($sformatf("LRS before pulses %g", r_meas));
    f = (0.2 / 1.2) ** 5.0;
    for (int p = 1; p <= 3000; p++) begin
      pad_v[1] = V_WL; pad_v[0] = 1.0;   // 1 V RESET pulse on the source line
      #1;
      pad_v[0] = 0.0; pad_v[1] = 0.0;
      #1;
      r_exp = r_exp + (R_HRS - r_exp) * f;
      n_weak_pulse++;
      if (p % 1000 == 0) begin
        measure(r_meas);
        checks++;
        if (!close(r_meas, r_exp, 1e-6))
          fail($sformatf("after %0d pulses %g ohm, expected %g", p, r_meas, r_exp));
      end
    end
    checks++;
    if (!(r_exp > 2.0 * K_LRS / (V_WL - VT))) fail("resistance did not rise");
    switch_mode(0);

    // ---- 5. digital read after the analog work: the partially reset device
    // still conducts more than its high-resistance partner, so the bit holds
    read_check(0, '1, "read after analog mode");
    x = {$urandom, $urandom};
    read_check(0, x, "XNOR read after analog mode");

    // ---- mechanism coverage ----
    $display("forms=%0d writes=%0d reads=%0d xnor_reads=%0d set=%0d reset=%0d",
             n_form, n_write, n_read, n_xnor, n_set, n_reset);
    $display("to_analog=%0d to_digital=%0d deferred=%0d refused=%0d measures=%0d weak_pulses=%0d",
             n_to_analog, n_to_digital, n_deferred, n_refused, n_measure, n_weak_pulse);
    begin
      int cnt [12];
      cnt = '{n_form, n_write, n_read, n_xnor, n_set, n_reset, n_to_analog,
              n_to_digital, n_deferred, n_refused, n_measure, n_weak_pulse};
      foreach (cnt[i]) begin
        checks++;
        if (cnt[i] == 0) fail($sformatf("mechanism %0d never happened", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
