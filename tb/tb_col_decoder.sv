// tb_col_decoder: exhaustive check of the column decoder.
// For every cell column and every pair of side masks the bit-line and
// source-line selects must hit exactly the addressed device columns.
module tb_col_decoder;
  localparam int unsigned COLS = 64;
  logic en;
  logic [5:0] addr;
  logic [1:0] bl_side, sl_side;
  logic [2*COLS-1:0] bl_sel, sl_sel;
  int checks = 0, failures = 0;

  col_decoder #(.COLS(COLS)) dut (.en, .addr, .bl_side, .sl_side, .bl_sel, .sl_sel);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < COLS; a++)
        for (int m = 0; m < 16; m++) begin
          logic [2*COLS-1:0] exp_bl, exp_sl;
          en = e[0];
          addr = 6'(a);
          bl_side = m[1:0];
          sl_side = m[3:2];
          #1;
          exp_bl = '0;
          exp_sl = '0;
          if (e == 1) begin
            exp_bl[2*a]   = m[0];
            exp_bl[2*a+1] = m[1];
            exp_sl[2*a]   = m[2];
            exp_sl[2*a+1] = m[3];
          end
          checks++;
          if (bl_sel !== exp_bl || sl_sel !== exp_sl) begin
            failures++;
            $display("FAIL en=%0d col=%0d m=%0d", e, a, m);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
