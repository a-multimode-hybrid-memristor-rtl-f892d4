// tb_row_decoder: exhaustive check of the word-line decoder.
// Every address with en high must select exactly that word line; with en low
// no word line may be selected. Expected values are built bit by bit here.
module tb_row_decoder;
  localparam int unsigned ROWS = 64;
  logic en;
  logic [5:0] addr;
  logic [ROWS-1:0] wl_sel;
  int checks = 0, failures = 0;

  row_decoder #(.ROWS(ROWS)) dut (.en, .addr, .wl_sel);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < ROWS; a++) begin
        logic [ROWS-1:0] exp_sel;
        en = e[0];
        addr = 6'(a);
        #1;
        exp_sel = '0;
        if (e == 1) exp_sel = 64'd1 << a;
        checks++;
        if (wl_sel !== exp_sel) begin
          failures++;
          $display("FAIL en=%0d addr=%0d got %h exp %h", e, a, wl_sel, exp_sel);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
