// tb_digital_ctrl: cycle-by-cycle check of the digital-mode sequencer.
// For random operations, addresses and pulse widths the testbench builds the
// expected drive of every cycle (row/column enables, polarity masks, sense
// enable, done) from the operation's definition and compares it with the
// controller, which also checks the latency of every operation. Reads return
// a pattern the testbench applies as sense-amplifier outputs. Commands given
// while enable is low must be ignored.
module tb_digital_ctrl;
  import mm_pkg::*;
  localparam int unsigned ROWS = 64, COLS = 64, PW_W = 16;
  logic clk = 0, rst_n, enable, start, side, wdata;
  op_e op;
  logic [5:0] row, col;
  logic [COLS-1:0] xnor_vec, rdata, sa_xnor, sa_q;
  logic [PW_W-1:0] pulse_cycles;
  logic busy, done, row_en, col_en, sa_en;
  logic [5:0] row_addr, col_addr;
  logic [1:0] bl_side, sl_side;
  int checks = 0, failures = 0;

  digital_ctrl #(.ROWS(ROWS), .COLS(COLS), .PW_W(PW_W)) dut (.*);

  always #5 clk = ~clk;

  // Sense amplifiers: stored word XNOR input, visible only while sa_en is high.
  logic [COLS-1:0] stored;
  always_comb sa_q = sa_en ? ~(stored ^ sa_xnor) : '1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct packed {
    logic       row_en, col_en, sa_en, done;
    logic [1:0] bl_side, sl_side;
  } drive_t;

  function automatic drive_t d(input logic re, ce, se, dn, input logic [1:0] bs, ss);
    drive_t x;
    x.row_en = re; x.col_en = ce; x.sa_en = se; x.done = dn; x.bl_side = bs; x.sl_side = ss;
    return x;
  endfunction

  task automatic run_op(input op_e o, input logic [5:0] r, c, input logic s, w,
                        input int pw_in);
    drive_t exp_q[$];
    drive_t got;
    int pw;
    pw = (pw_in == 0) ? 1 : pw_in;
    case (o)
      OP_READ: begin
        exp_q.push_back(d(1,0,0,0,2'b00,2'b00));
        exp_q.push_back(d(1,0,1,0,2'b00,2'b00));
      end
      OP_SET:   repeat (pw) exp_q.push_back(d(1,1,0,0, s ? 2'b10 : 2'b01, 2'b00));
      OP_RESET: repeat (pw) exp_q.push_back(d(1,1,0,0, 2'b00, s ? 2'b10 : 2'b01));
      OP_WRITE: begin
        repeat (pw) exp_q.push_back(d(1,1,0,0, w ? 2'b01 : 2'b10, 2'b00));
        exp_q.push_back(d(0,0,0,0,2'b00,2'b00));
        repeat (pw) exp_q.push_back(d(1,1,0,0, 2'b00, w ? 2'b10 : 2'b01));
      end
      default: begin // OP_FORM
        repeat (pw) exp_q.push_back(d(1,1,0,0, 2'b01, 2'b00));
        exp_q.push_back(d(0,0,0,0,2'b00,2'b00));
        repeat (pw) exp_q.push_back(d(1,1,0,0, 2'b10, 2'b00));
      end
    endcase
    exp_q.push_back(d(0,0,0,1,2'b00,2'b00));
    op = o; row = r; col = c; side = s; wdata = w;
    pulse_cycles = PW_W'(pw_in);
    xnor_vec = {$urandom, $urandom};
    stored = {$urandom, $urandom};
    start = 1;
    @(posedge clk); #1;
    start = 0;
    foreach (exp_q[k]) begin
      got = d(row_en, col_en, sa_en, done, bl_side, sl_side);
      checks++;
      if (got !== exp_q[k] || (row_en && row_addr !== r) || (col_en && col_addr !== c)) begin
        failures++;
        $display("FAIL op=%s pw=%0d cycle %0d got %b exp %b", o.name(), pw, k + 1, got, exp_q[k]);
      end
      @(posedge clk); #1;
    end
    checks++;
    if (busy) begin failures++; $display("FAIL still busy after %s", o.name()); end
    if (o == OP_READ) begin
      checks++;
      if (rdata !== ~(stored ^ xnor_vec)) begin
        failures++;
        $display("FAIL read data %h exp %h", rdata, ~(stored ^ xnor_vec));
      end
    end
  endtask

  initial begin
    rst_n = 0; enable = 1; start = 0; op = OP_READ; row = 0; col = 0; side = 0;
    wdata = 0; xnor_vec = '1; pulse_cycles = 1; stored = '0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < 300; i++) begin
      op_e o;
      o = op_e'($urandom_range(4, 0));
      run_op(o, 6'($urandom), 6'($urandom), 1'($urandom), 1'($urandom),
             $urandom_range(12, 0));
      repeat ($urandom_range(2, 0)) @(posedge clk);
      #1;
    end
    // commands are ignored while the digital mode is inactive
    enable = 0; op = OP_SET; start = 1;
    @(posedge clk); #1;
    start = 0;
    repeat (3) begin
      checks++;
      if (busy || row_en || col_en) begin failures++; $display("FAIL ran while disabled"); end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
