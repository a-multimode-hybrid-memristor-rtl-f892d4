// rram_array_2t2r: behavioural model of the hafnium-oxide memristor array.
//
// Behavioural model (not synthesizable logic): the real part is a full custom
// array of memristors deposited above metal 4, each in series with an access
// transistor. ROWS word lines drive the access-transistor gates; each of the
// 2*COLS device columns has its own bit line and source line. Device columns
// 2c and 2c+1 form complementary cell column c.
//
// Every device keeps a resistance, a formed flag and a count of SET/RESET
// cycles. A device is selected when its word line is at or above VT_ACCESS.
// With bias = V(bit line) - V(source line) across a selected device:
//   * a pristine device forms when a pulse reaches bias >= V_FORM_TH; it then
//     holds the low-resistance state (LRS);
//   * a formed device SETs to LRS when a pulse reaches bias >= V_SET_TH. The
//     LRS resistance is K_LRS / (V_wl - VT_ACCESS): the access transistor acts
//     as current compliance, so a higher word-line voltage gives a lower LRS;
//   * a formed device RESETs when a pulse reaches -bias >= V_RESET_TH. Each
//     such pulse moves the resistance a fraction f of the way to R_HRS, with
//     f = ((-bias - V_RESET_TH)/(V_RESET_FULL - V_RESET_TH))^RESET_EXP capped
//     at 1. Strong pulses reset in one shot; weak ones (about 1 V) raise the
//     resistance gradually over thousands of pulses;
//   * after ENDURANCE SET/RESET cycles a device is worn out: RESET no longer
//     moves it away from LRS.
// A pulse is the moment a device's bias crosses the threshold; it acts once,
// whatever its length. Pulse width and read disturb are not modelled.
// Outputs, per device column: bl_g, the conductance from bit line to source
// line through every selected device (what a sense amplifier sees), bl_i =
// bl_g * bias, the current flowing into the bit line, and sl_i = -bl_i.
// The access transistor's on-resistance is neglected.
//
// The paper gives the device count, the complementary 2T2R arrangement, the
// gradual resistance increase under repeated 1 V RESET pulses and the wear-out
// after up to 1e9 cycles. The thresholds, resistances and the update law are
// this design's choices of plausible HfO2 values, meant to be tuned.
module rram_array_2t2r #(
  parameter int unsigned     ROWS         = mm_pkg::DEF_ROWS,
  parameter int unsigned     COLS         = mm_pkg::DEF_COLS,
  parameter real             VT_ACCESS    = 0.5,
  parameter real             V_FORM_TH    = 2.5,
  parameter real             V_SET_TH     = 1.0,
  parameter real             V_RESET_TH   = 0.8,
  parameter real             V_RESET_FULL = 2.0,
  parameter real             RESET_EXP    = 5.0,
  parameter real             R_PRISTINE   = 1.0e8,
  parameter real             R_HRS        = 1.0e5,
  parameter real             K_LRS        = 5.0e3,
  parameter longint unsigned ENDURANCE    = 64'd1_000_000_000
) (
  input  real wl_v [ROWS],
  input  real bl_v [2*COLS],
  input  real sl_v [2*COLS],
  output real bl_g [2*COLS],
  output real bl_i [2*COLS],
  output real sl_i [2*COLS]
);

  localparam int unsigned NDC = 2 * COLS;
  localparam int unsigned NDEV = ROWS * NDC;

  real             r_dev  [ROWS][NDC];
  logic            formed [ROWS][NDC];
  logic            in_lrs [ROWS][NDC];
  longint unsigned cycles [ROWS][NDC];

  logic [NDEV-1:0] cond_pos, cond_neg;
  logic [NDEV-1:0] prev_pos, prev_neg;

  initial begin
    prev_pos = '0;
    prev_neg = '0;
    for (int unsigned r = 0; r < ROWS; r++)
      for (int unsigned c = 0; c < NDC; c++) begin
        r_dev[r][c]  = R_PRISTINE;
        formed[r][c] = 1'b0;
        in_lrs[r][c] = 1'b0;
        cycles[r][c] = 0;
      end
  end

  // Which devices are under a SET-polarity or RESET-polarity pulse.
  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++)
      for (int unsigned c = 0; c < NDC; c++) begin
        cond_pos[r*NDC+c] = (wl_v[r] >= VT_ACCESS) && (bl_v[c] - sl_v[c] >= V_SET_TH);
        cond_neg[r*NDC+c] = (wl_v[r] >= VT_ACCESS) && (sl_v[c] - bl_v[c] >= V_RESET_TH);
      end
  end

  function automatic real lrs_of(input real vwl);
    real ov;
    ov = vwl - VT_ACCESS;
    if (ov < 0.05) ov = 0.05;
    return K_LRS / ov;
  endfunction

  // State update at the leading edge of each pulse.
  always @(cond_pos or cond_neg) begin : program_devices
    logic [NDEV-1:0] rise_pos, rise_neg;
    real bias, f;
    rise_pos = cond_pos & ~prev_pos;
    rise_neg = cond_neg & ~prev_neg;
    if ((rise_pos | rise_neg) != '0) begin
      for (int unsigned r = 0; r < ROWS; r++)
        for (int unsigned c = 0; c < NDC; c++) begin
          bias = bl_v[c] - sl_v[c];
          if (rise_pos[r*NDC+c]) begin
            if (formed[r][c]) begin
              if (!in_lrs[r][c]) cycles[r][c] = cycles[r][c] + 1;
              r_dev[r][c]  = lrs_of(wl_v[r]);
              in_lrs[r][c] = 1'b1;
            end else if (bias >= V_FORM_TH) begin
              formed[r][c] = 1'b1;
              r_dev[r][c]  = lrs_of(wl_v[r]);
              in_lrs[r][c] = 1'b1;
            end
          end
          if (rise_neg[r*NDC+c] && formed[r][c] && cycles[r][c] < ENDURANCE) begin
            f = ((-bias - V_RESET_TH) / (V_RESET_FULL - V_RESET_TH)) ** RESET_EXP;
            if (f > 1.0) f = 1.0;
            r_dev[r][c]  = r_dev[r][c] + (R_HRS - r_dev[r][c]) * f;
            in_lrs[r][c] = 1'b0;
          end
        end
    end
    prev_pos = cond_pos;
    prev_neg = cond_neg;
  end

  // Conductance and currents seen from the bit and source lines.
  always_comb begin
    for (int unsigned c = 0; c < NDC; c++) begin
      bl_g[c] = 0.0;
      for (int unsigned r = 0; r < ROWS; r++)
        if (wl_v[r] >= VT_ACCESS) bl_g[c] = bl_g[c] + 1.0 / r_dev[r][c];
      bl_i[c] = bl_g[c] * (bl_v[c] - sl_v[c]);
      sl_i[c] = -bl_i[c];
    end
  end

endmodule
