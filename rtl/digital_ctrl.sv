// digital_ctrl: sequencer of the digital mode.
//
// Accepts one operation at a time (op_e in mm_pkg) and drives the row and
// column decoders, the polarity masks that pick bit or source lines, and the
// sense-enable of the precharge sense amplifiers.
//
//   OP_READ  : cycle 1 word line on, sense amplifiers precharging (sa_en=0);
//              cycle 2 sa_en=1, the amplifiers resolve and latch; at the end
//              of cycle 2 their outputs are captured into rdata. done is high
//              in cycle 3. xnor_vec is presented to the amplifiers for the
//              whole read; all ones gives a plain read.
//   OP_SET / OP_RESET : one pulse of pulse_cycles cycles on device
//              (row, col, side), then done.
//   OP_WRITE : bit wdata into cell (row, col): a SET pulse on the device that
//              must end up low-resistance (left for 1, right for 0), one idle
//              cycle with every line released, then a RESET pulse on its
//              partner. done follows the second pulse.
//   OP_FORM  : as OP_WRITE but both pulses have SET polarity, first on the
//              left device, then on the right one. The forming voltage itself
//              is set on the external high-voltage rails.
//
// Latencies, counted in cycles after the clock edge that accepts start:
// done is high in cycle 3 for a read, pw+1 for SET/RESET, and 2*pw+2 for
// WRITE/FORM, where pw = max(pulse_cycles, 1). start is taken only when the
// controller is idle and enable (digital mode active) is high; busy covers the
// whole operation, done is a one-cycle pulse.
//
// The paper lists the digital-mode parts (decoders, level shifters, sense
// amplifiers with XNOR, complementary cells) and their purpose; the operation
// set, the two-pulse write order, the idle cycle between pulses and the
// cycle-level timing are this design's own.
module digital_ctrl
  import mm_pkg::*;
#(
  parameter int unsigned ROWS = mm_pkg::DEF_ROWS,
  parameter int unsigned COLS = mm_pkg::DEF_COLS,
  parameter int unsigned PW_W = 16,
  localparam int unsigned RAW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CAW = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            enable,
  // command
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
  // to the periphery
  output logic            row_en,
  output logic [RAW-1:0]  row_addr,
  output logic            col_en,
  output logic [CAW-1:0]  col_addr,
  output logic [1:0]      bl_side,
  output logic [1:0]      sl_side,
  output logic            sa_en,
  output logic [COLS-1:0] sa_xnor,
  input  logic [COLS-1:0] sa_q
);

  typedef enum logic [2:0] {
    S_IDLE, S_RD_PCH, S_RD_EVAL, S_PULSE1, S_GAP, S_PULSE2, S_DONE
  } state_e;

  state_e          state;
  op_e             op_q;
  logic            side_q, wdata_q;
  logic [PW_W-1:0] pw_q, cnt;
  logic [RAW-1:0]  row_q;
  logic [CAW-1:0]  col_q;
  logic [COLS-1:0] xnor_q;

  assign busy     = (state != S_IDLE);
  assign done     = (state == S_DONE);
  assign row_addr = row_q;
  assign col_addr = col_q;
  assign sa_xnor  = xnor_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      op_q    <= OP_READ;
      row_q   <= '0;
      col_q   <= '0;
      side_q  <= 1'b0;
      wdata_q <= 1'b0;
      xnor_q  <= '1;
      pw_q    <= PW_W'(1);
      cnt     <= '0;
      rdata   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start && enable) begin
          op_q    <= op;
          row_q   <= row;
          col_q   <= col;
          side_q  <= side;
          wdata_q <= wdata;
          xnor_q  <= (op == OP_READ) ? xnor_vec : '1;
          pw_q    <= (pulse_cycles == '0) ? PW_W'(1) : pulse_cycles;
          cnt     <= (pulse_cycles == '0) ? '0 : pulse_cycles - PW_W'(1);
          state   <= (op == OP_READ) ? S_RD_PCH : S_PULSE1;
        end
        S_RD_PCH:  state <= S_RD_EVAL;
        S_RD_EVAL: begin
          rdata <= sa_q;
          state <= S_DONE;
        end
        S_PULSE1: begin
          if (cnt != '0) cnt <= cnt - PW_W'(1);
          else if (op_q == OP_WRITE || op_q == OP_FORM) state <= S_GAP;
          else state <= S_DONE;
        end
        S_GAP: begin
          cnt   <= pw_q - PW_W'(1);
          state <= S_PULSE2;
        end
        S_PULSE2: begin
          if (cnt != '0) cnt <= cnt - PW_W'(1);
          else state <= S_DONE;
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Drive of the decoders and polarity masks, decoded from the state.
  always_comb begin
    row_en  = 1'b0;
    col_en  = 1'b0;
    bl_side = 2'b00;
    sl_side = 2'b00;
    sa_en   = 1'b0;
    unique case (state)
      S_RD_PCH:  row_en = 1'b1;
      S_RD_EVAL: begin row_en = 1'b1; sa_en = 1'b1; end
      S_PULSE1: begin
        row_en = 1'b1;
        col_en = 1'b1;
        unique case (op_q)
          OP_SET:   bl_side = side_q ? 2'b10 : 2'b01;
          OP_RESET: sl_side = side_q ? 2'b10 : 2'b01;
          OP_WRITE: bl_side = wdata_q ? 2'b01 : 2'b10;  // SET the device to be LRS
          OP_FORM:  bl_side = 2'b01;
          default:  ;
        endcase
      end
      S_PULSE2: begin
        row_en = 1'b1;
        col_en = 1'b1;
        unique case (op_q)
          OP_WRITE: sl_side = wdata_q ? 2'b10 : 2'b01;  // RESET its partner
          OP_FORM:  bl_side = 2'b10;
          default:  ;
        endcase
      end
      default: ;
    endcase
  end

  // done lasts one cycle.
  a_done_pulse: assert property (@(posedge clk) disable iff (!rst_n)
    done |=> !done);
  // The left and right devices of a pair are never both driven.
  a_one_device: assert property (@(posedge clk) disable iff (!rst_n)
    (bl_side != 2'b11) && (sl_side != 2'b11) && !((|bl_side) && (|sl_side)));

endmodule
