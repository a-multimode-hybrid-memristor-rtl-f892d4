// tb_analog_mux_bank: line voltages and pad currents for every mode.
// Digital mode: lines follow their drivers, pads see no current. Analog
// mode: each line takes ground, pad A or pad B per its code and each pad
// collects the currents of its lines. Neither mode: lines at 0 V.
module tb_analog_mux_bank;
  import mm_pkg::*;
  localparam int unsigned LINES = 16;
  logic dig_active, ana_active;
  line_sel_e sel [LINES];
  real dig_v [LINES];
  real pad_v [2];
  real line_i [LINES];
  real line_v [LINES];
  real pad_i [2];
  int checks = 0, failures = 0;

  analog_mux_bank #(.LINES(LINES)) dut (.*);

  function automatic logic near(input real a, input real b);
    return (a - b < 1e-12) && (b - a < 1e-12);
  endfunction

  task automatic chk(input real got, input real exp_v, input string what);
    checks++;
    if (!near(got, exp_v)) begin
      failures++;
      $display("FAIL %s got %g exp %g", what, got, exp_v);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ea, eb;
    pad_v[0] = 0.2; pad_v[1] = 2.5;
    for (int i = 0; i < LINES; i++) begin
      sel[i] = line_sel_e'(i % 4);
      dig_v[i] = 0.1 * i;
      line_i[i] = 1e-6 * (i + 1);
    end
    for (int m = 0; m < 3; m++) begin
      dig_active = (m == 0);
      ana_active = (m == 1);
      #1;
      ea = 0.0; eb = 0.0;
      for (int i = 0; i < LINES; i++) begin
        real ev;
        if (m == 0) ev = 0.1 * i;
        else if (m == 1 && i % 4 == 1) begin ev = 0.2; ea += 1e-6 * (i + 1); end
        else if (m == 1 && i % 4 == 2) begin ev = 2.5; eb += 1e-6 * (i + 1); end
        else ev = 0.0;
        chk(line_v[i], ev, $sformatf("mode %0d line %0d", m, i));
      end
      chk(pad_i[0], ea, "pad A current");
      chk(pad_i[1], eb, "pad B current");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
