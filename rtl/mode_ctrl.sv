// mode_ctrl: switch between the digital mode and the analog mode.
//
// In the digital mode the array lines are driven by the level shifters and
// read by the sense amplifiers. In the analog mode the digital circuits are
// switched off and every line is connected, through transmission gates, to
// ground or to one of the two analog pads. mode_req (1 = analog) comes from a
// pin and is synchronised with two flip-flops. A change of mode waits until
// the digital controller is idle, then all lines are left disconnected for
// BBM_CYCLES cycles (break before make) before the new side is connected.
// dig_active and ana_active are never high together. After reset the chip is
// in the digital mode with the digital side connected.
//
// From the paper: the two modes, and that the digital circuits are
// deactivated and the array connections switched in the analog mode. The
// synchroniser, the wait for an idle controller and the break-before-make
// interval are this design's own.
module mode_ctrl
  import mm_pkg::*;
#(
  parameter int unsigned BBM_CYCLES = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  mode_req,
  input  logic  dig_busy,
  output mode_e mode,
  output logic  dig_active,
  output logic  ana_active
);

  localparam int unsigned CW = (BBM_CYCLES > 1) ? $clog2(BBM_CYCLES + 1) : 1;

  logic [1:0]    sync;
  logic          req;
  logic [CW-1:0] cnt;

  assign req        = sync[1];
  assign dig_active = (mode == MODE_DIGITAL);
  assign ana_active = (mode == MODE_ANALOG);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync <= 2'b00;
      mode <= MODE_DIGITAL;
      cnt  <= '0;
    end else begin
      sync <= {sync[0], mode_req};
      unique case (mode)
        MODE_DIGITAL: if (req && !dig_busy) begin
          mode <= MODE_TO_ANALOG;
          cnt  <= CW'(BBM_CYCLES);
        end
        MODE_TO_ANALOG: begin
          if (cnt > CW'(1)) cnt <= cnt - CW'(1);
          else              mode <= MODE_ANALOG;
        end
        MODE_ANALOG: if (!req) begin
          mode <= MODE_TO_DIGITAL;
          cnt  <= CW'(BBM_CYCLES);
        end
        MODE_TO_DIGITAL: begin
          if (cnt > CW'(1)) cnt <= cnt - CW'(1);
          else              mode <= MODE_DIGITAL;
        end
        default: mode <= MODE_DIGITAL;
      endcase
    end
  end

  a_exclusive: assert property (@(posedge clk) !(dig_active && ana_active));
  a_no_switch_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (dig_active && dig_busy) |=> dig_active);

endmodule
