// tb_rram_array_2t2r: device behaviour of the memristor array model.
// A 4 x 2 array (8 devices) is driven directly with line voltages. Checked
// against values computed here from the device law: pristine conductance,
// no forming below the forming threshold, forming, word-line-dependent LRS,
// one-shot RESET, gradual RESET under many weak pulses, unselected rows left
// alone, bit-line and source-line currents, and wear-out after ENDURANCE
// cycles.
module tb_rram_array_2t2r;
  localparam int unsigned ROWS = 4, COLS = 2, NDC = 4;
  localparam real R_PRIS = 1.0e8, R_HRS = 1.0e5, K_LRS = 5.0e3, VT = 0.5;
  real wl_v [ROWS];
  real bl_v [NDC];
  real sl_v [NDC];
  real bl_g [NDC];
  real bl_i [NDC];
  real sl_i [NDC];
  int checks = 0, failures = 0;

  rram_array_2t2r #(.ROWS(ROWS), .COLS(COLS), .ENDURANCE(3)) dut (.*);

  task automatic chk(input real got, input real exp_v, input string what);
    real tol;
    tol = (exp_v < 0 ? -exp_v : exp_v) * 1e-6 + 1e-15;
    checks++;
    if (got - exp_v > tol || exp_v - got > tol) begin
      failures++;
      $display("FAIL %s got %g exp %g", what, got, exp_v);
    end
  endtask

  task automatic idle();
    foreach (wl_v[r]) wl_v[r] = 0.0;
    foreach (bl_v[c]) begin bl_v[c] = 0.0; sl_v[c] = 0.0; end
    #1;
  endtask

  // One pulse on device (r, c): word line vwl, bit line vb, source line vs.
  task automatic pulse(input int r, c, input real vwl, vb, vs);
    wl_v[r] = vwl; bl_v[c] = vb; sl_v[c] = vs;
    #1;
    idle();
  endtask

  // Conductance of device (r, c) seen from its bit line with only row r on.
  task automatic g_of(input int r, c, output real g);
    wl_v[r] = 1.5;
    #1;
    g = bl_g[c];
    idle();
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real g, r_exp, f;
    idle();
    g_of(0, 0, g); chk(g, 1.0 / R_PRIS, "pristine");
    pulse(0, 0, 1.5, 2.0, 0.0);                 // below forming threshold
    g_of(0, 0, g); chk(g, 1.0 / R_PRIS, "not formed by 2 V");
    pulse(0, 0, 1.5, 3.0, 0.0);                 // forming
    g_of(0, 0, g); chk(g, (1.5 - VT) / K_LRS, "formed LRS");
    g_of(1, 0, g); chk(g, 1.0 / R_PRIS, "other row untouched");
    g_of(0, 1, g); chk(g, 1.0 / R_PRIS, "other column untouched");
    pulse(0, 0, 0.2, 0.0, 2.5);                 // word line off: nothing
    g_of(0, 0, g); chk(g, (1.5 - VT) / K_LRS, "no reset with word line off");
    pulse(0, 0, 1.5, 0.0, 2.0);                 // full reset
    g_of(0, 0, g); chk(g, 1.0 / R_HRS, "one-shot reset");
    pulse(0, 0, 2.5, 1.5, 0.0);                 // set with stronger word line
    g_of(0, 0, g); chk(g, (2.5 - VT) / K_LRS, "LRS set by word line");
    // gradual reset with 2000 pulses of 1 V on the source line
    r_exp = K_LRS / (2.5 - VT);
    f = (0.2 / 1.2) ** 5.0;
    for (int n = 1; n <= 2000; n++) begin
      pulse(0, 0, 2.5, 0.0, 1.0);
      r_exp = r_exp + (R_HRS - r_exp) * f;
      if (n % 500 == 0) begin
        g_of(0, 0, g);
        chk(g, 1.0 / r_exp, $sformatf("gradual reset after %0d pulses", n));
      end
    end
    checks++;
    if (r_exp < 2.0 * K_LRS / 2.0 || r_exp > R_HRS) begin
      failures++;
      $display("FAIL gradual reset not progressive: %g", r_exp);
    end
    // currents with bias 0.2 V on device (0,0), row 0 selected
    wl_v[0] = 1.5; bl_v[0] = 0.2; #1;
    chk(bl_i[0], 0.2 / r_exp, "bit-line current");
    chk(sl_i[0], -0.2 / r_exp, "source-line current");
    chk(bl_i[1], 0.0, "no current on unbiased line");
    idle();
    // two devices on one bit line in parallel (rows 0 and 1 both on)
    pulse(1, 0, 1.5, 3.0, 0.0);                 // form (1,0)
    wl_v[0] = 1.5; wl_v[1] = 1.5; #1;
    chk(bl_g[0], 1.0 / r_exp + (1.5 - VT) / K_LRS, "parallel devices");
    idle();
    // wear-out: device (2,2) formed, then cycled; ENDURANCE = 3
    pulse(2, 2, 1.5, 3.0, 0.0);
    for (int k = 1; k <= 4; k++) begin
      pulse(2, 2, 1.5, 0.0, 2.0);
      pulse(2, 2, 1.5, 1.5, 0.0);             // SET: cycle k counted
    end
    pulse(2, 2, 1.5, 0.0, 2.0);
    g_of(2, 2, g); chk(g, (1.5 - VT) / K_LRS, "worn device stuck in LRS");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
