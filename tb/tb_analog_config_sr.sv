// tb_analog_config_sr: shift in a random configuration, check every line's
// code, check that the register holds when shift is low, then shift a second
// pattern and check the first one comes out of sout bit for bit. Reset must
// give ground everywhere.
module tb_analog_config_sr;
  import mm_pkg::*;
  localparam int unsigned LINES = 128;
  logic clk = 0, rst_n, shift, sin, sout;
  line_sel_e sel [LINES];
  logic [1:0] pat1 [LINES];
  logic [1:0] pat2 [LINES];
  int checks = 0, failures = 0;

  analog_config_sr #(.LINES(LINES)) dut (.clk, .rst_n, .shift, .sin, .sout, .sel);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input logic [1:0] pat [LINES], input logic check_out,
                      input logic [1:0] prev [LINES]);
    for (int i = 0; i < LINES; i++)
      for (int b = 0; b < 2; b++) begin
        if (check_out) begin
          checks++;
          if (sout !== prev[i][b]) begin
            failures++;
            $display("FAIL sout line %0d bit %0d", i, b);
          end
        end
        sin = pat[i][b];
        shift = 1;
        @(posedge clk); #1;
      end
    shift = 0;
  endtask

  initial begin
    rst_n = 0; shift = 0; sin = 0;
    for (int i = 0; i < LINES; i++) begin
      pat1[i] = 2'($urandom);
      pat2[i] = 2'($urandom);
    end
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    for (int i = 0; i < LINES; i++) begin
      checks++;
      if (sel[i] !== LINE_GND) failures++;
    end
    load(pat1, 1'b0, pat1);
    repeat (5) @(posedge clk); #1;
    for (int i = 0; i < LINES; i++) begin
      checks++;
      if (2'(sel[i]) !== pat1[i]) begin
        failures++;
        $display("FAIL line %0d got %0d exp %0d", i, sel[i], pat1[i]);
      end
    end
    load(pat2, 1'b1, pat1);
    for (int i = 0; i < LINES; i++) begin
      checks++;
      if (2'(sel[i]) !== pat2[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
