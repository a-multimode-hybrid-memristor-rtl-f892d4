// memristor_platform: top level of the hybrid memristor/CMOS prototyping die.
//
// An array of 8,192 memristors (rram_array_2t2r, 64 word lines x 64
// complementary cells) with two sets of periphery that take turns on it:
//
//  * Digital mode. A command (op, row, col, side, wdata, xnor_vec,
//    pulse_cycles, start) goes to digital_ctrl, which drives row_decoder and
//    col_decoder. Their one-hot selects go through one level_shifter per word
//    line, bit line and source line, lifting them to the externally supplied
//    rails v_wl, v_bl and v_sl. Reads use one precharge sense amplifier (pcsa)
//    per complementary column; each returns its stored bit XNOR the column's
//    bit of xnor_vec, and the row comes back on rdata. See digital_ctrl for
//    the operations and their cycle counts.
//  * Analog mode. Three configuration shift registers (analog_config_sr:
//    word lines, bit lines, source lines, each with its own serial input and
//    output, all shifted by sr_shift) set each line to ground, analog pad A
//    or analog pad B. The analog_mux_bank models then connect the lines
//    accordingly; pad_v are the voltages the external instrument forces on the
//    two pads and pad_i the currents it measures (positive into the die).
//
// mode_req (1 = analog) selects the mode through mode_ctrl, which waits for
// the digital controller to be idle and leaves every line disconnected for a
// few cycles before connecting the other side. In the analog mode the digital
// controller refuses commands, the decoders are disabled and the sense
// amplifiers stay in precharge.
//
// The structure follows the paper's block diagram of the die; the pin list,
// the serial configuration interface and the high-voltage rails as ports are
// this design's own. The array, level shifters, sense amplifiers and line
// multiplexers are behavioural models of analog parts, so this top is for
// simulation; the synthesizable digital part is digital_ctrl, mode_ctrl,
// the decoders and the shift registers. ENDURANCE is passed to the array
// model: the number of SET/RESET cycles after which a device wears out.
module memristor_platform
  import mm_pkg::*;
#(
  parameter int unsigned ROWS       = mm_pkg::DEF_ROWS,
  parameter int unsigned COLS       = mm_pkg::DEF_COLS,
  parameter int unsigned PW_W       = 16,
  parameter int unsigned BBM_CYCLES = 4,
  parameter longint unsigned ENDURANCE = 64'd1_000_000_000,
  localparam int unsigned RAW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CAW = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // mode selection
  input  logic            mode_req,
  output mode_e           mode,
  // digital-mode command interface
  input  logic            start,
  input  op_e             op,
  input  logic [RAW-1:0]  row,
  input  logic [CAW-1:0]  col,
  input  logic            side,
  input  logic            wdata,
  input  logic [COLS-1:0] xnor_vec,
  input  logic [PW_W-1:0] pulse_cycles,
  output logic            busy,
  output logic            done,
  output logic [COLS-1:0] rdata,
  // analog-mode configuration chains
  input  logic            sr_shift,
  input  logic            sr_in_wl,
  input  logic            sr_in_bl,
  input  logic            sr_in_sl,
  output logic            sr_out_wl,
  output logic            sr_out_bl,
  output logic            sr_out_sl,
  // high-voltage rails of the level shifters
  input  real             v_wl,
  input  real             v_bl,
  input  real             v_sl,
  // analog InOut pads
  input  real             pad_v [2],
  output real             pad_i [2]
);

  localparam int unsigned NDC = 2 * COLS;

  logic dig_active, ana_active;

  // ---------------- mode control ----------------
  mode_ctrl #(.BBM_CYCLES(BBM_CYCLES)) u_mode (
    .clk, .rst_n, .mode_req, .dig_busy(busy),
    .mode, .dig_active, .ana_active
  );

  // ---------------- digital mode ----------------
  logic            row_en, col_en, sa_en;
  logic [RAW-1:0]  row_addr;
  logic [CAW-1:0]  col_addr;
  logic [1:0]      bl_side, sl_side;
  logic [COLS-1:0] sa_xnor, sa_q;
  logic [ROWS-1:0] wl_sel;
  logic [NDC-1:0]  bl_sel, sl_sel;

  digital_ctrl #(.ROWS(ROWS), .COLS(COLS), .PW_W(PW_W)) u_ctrl (
    .clk, .rst_n, .enable(dig_active),
    .start, .op, .row, .col, .side, .wdata, .xnor_vec, .pulse_cycles,
    .busy, .done, .rdata,
    .row_en, .row_addr, .col_en, .col_addr, .bl_side, .sl_side,
    .sa_en, .sa_xnor, .sa_q
  );

  row_decoder #(.ROWS(ROWS)) u_rowdec (
    .en(row_en && dig_active), .addr(row_addr), .wl_sel
  );

  col_decoder #(.COLS(COLS)) u_coldec (
    .en(col_en && dig_active), .addr(col_addr), .bl_side, .sl_side,
    .bl_sel, .sl_sel
  );

  real wl_dig_v [ROWS];
  real bl_dig_v [NDC];
  real sl_dig_v [NDC];

  for (genvar r = 0; r < ROWS; r++) begin : g_ls_wl
    level_shifter u_ls (.in(wl_sel[r]), .vddh(v_wl), .out(wl_dig_v[r]));
  end
  for (genvar c = 0; c < NDC; c++) begin : g_ls_col
    level_shifter u_ls_bl (.in(bl_sel[c]), .vddh(v_bl), .out(bl_dig_v[c]));
    level_shifter u_ls_sl (.in(sl_sel[c]), .vddh(v_sl), .out(sl_dig_v[c]));
  end

  // ---------------- analog mode configuration ----------------
  line_sel_e wl_cfg [ROWS];
  line_sel_e bl_cfg [NDC];
  line_sel_e sl_cfg [NDC];

  analog_config_sr #(.LINES(ROWS)) u_sr_wl (
    .clk, .rst_n, .shift(sr_shift), .sin(sr_in_wl), .sout(sr_out_wl), .sel(wl_cfg)
  );
  analog_config_sr #(.LINES(NDC)) u_sr_bl (
    .clk, .rst_n, .shift(sr_shift), .sin(sr_in_bl), .sout(sr_out_bl), .sel(bl_cfg)
  );
  analog_config_sr #(.LINES(NDC)) u_sr_sl (
    .clk, .rst_n, .shift(sr_shift), .sin(sr_in_sl), .sout(sr_out_sl), .sel(sl_cfg)
  );

  // ---------------- line multiplexers ----------------
  real wl_v [ROWS];
  real bl_v [NDC];
  real sl_v [NDC];
  real wl_i [ROWS];
  real bl_i [NDC];
  real sl_i [NDC];
  real bl_g [NDC];
  real pad_i_wl [2];
  real pad_i_bl [2];
  real pad_i_sl [2];

  always_comb
    for (int unsigned r = 0; r < ROWS; r++) wl_i[r] = 0.0;  // gates draw no current

  analog_mux_bank #(.LINES(ROWS)) u_mux_wl (
    .dig_active, .ana_active, .sel(wl_cfg), .dig_v(wl_dig_v), .pad_v,
    .line_i(wl_i), .line_v(wl_v), .pad_i(pad_i_wl)
  );
  analog_mux_bank #(.LINES(NDC)) u_mux_bl (
    .dig_active, .ana_active, .sel(bl_cfg), .dig_v(bl_dig_v), .pad_v,
    .line_i(bl_i), .line_v(bl_v), .pad_i(pad_i_bl)
  );
  analog_mux_bank #(.LINES(NDC)) u_mux_sl (
    .dig_active, .ana_active, .sel(sl_cfg), .dig_v(sl_dig_v), .pad_v,
    .line_i(sl_i), .line_v(sl_v), .pad_i(pad_i_sl)
  );

  always_comb begin
    pad_i[0] = pad_i_wl[0] + pad_i_bl[0] + pad_i_sl[0];
    pad_i[1] = pad_i_wl[1] + pad_i_bl[1] + pad_i_sl[1];
  end

  // ---------------- memristor array ----------------
  rram_array_2t2r #(.ROWS(ROWS), .COLS(COLS), .ENDURANCE(ENDURANCE)) u_array (
    .wl_v, .bl_v, .sl_v, .bl_g, .bl_i, .sl_i
  );

  // ---------------- sense amplifiers ----------------
  for (genvar c = 0; c < COLS; c++) begin : g_sa
    pcsa u_sa (
      .se(sa_en && dig_active), .g_bl(bl_g[2*c]), .g_blb(bl_g[2*c+1]),
      .xnor_in(sa_xnor[c]), .q(sa_q[c]), .qb()
    );
  end

endmodule
