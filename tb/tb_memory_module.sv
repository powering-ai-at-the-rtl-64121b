// tb_memory_module: self-checking test of the 2T2R memory module model.
//
// Full-size module (128 x 32 bit cells).  It checks that
//  - a pristine cell reads as w = 0 and that SET/RESET leave pristine memristors alone,
//  - forming, SET and RESET are refused (op_err, no change) with the wrong supplies,
//  - after forming every memristor of a set of rows and programming them with random
//    weights (SET then RESET, complementary), every read returns XNOR(x, w) one cycle
//    after the read command, with q all ones (precharge) in the other cycles,
//  - reprogramming a row with new weights overwrites the old ones.
module tb_memory_module;
  import bnn_pkg::*;
  localparam int R = ROWS, C = COLS;

  logic clk = 1'b0;
  mem_op_t op;
  logic [$clog2(R)-1:0] row;
  logic [$clog2(C)-1:0] col;
  logic side, x, op_err;
  logic [C-1:0] wdata, q;
  logic [12:0] vddc_mv, vddr_mv;
  logic [C-1:0] wref [R];
  int checks = 0, failures = 0;

  memory_module dut (.clk, .op, .row, .col, .side, .wdata, .x, .vddc_mv, .vddr_mv, .q, .op_err);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cyc(input mem_op_t o, input logic [12:0] vc, input logic [12:0] vr);
    op = o; vddc_mv = vc; vddr_mv = vr;
    @(posedge clk); #1;
  endtask

  task automatic form_row(input int r);
    row = ($clog2(R))'(r);
    for (int c = 0; c < C; c++)
      for (int s = 0; s < 2; s++) begin
        col = ($clog2(C))'(c); side = 1'(s);
        cyc(MEM_FORM, 13'd4500, 13'd2700);
      end
  endtask

  task automatic program_row(input int r, input logic [C-1:0] w);
    row = ($clog2(R))'(r); wdata = w;
    repeat (2) cyc(MEM_SET, 13'd2700, 13'd2700);
    repeat (2) cyc(MEM_RESET, 13'd2700, 13'd4500);
    wref[r] = w;
  endtask

  task automatic read_check(input int r, input logic xx, input logic [C-1:0] w);
    row = ($clog2(R))'(r); x = xx;
    cyc(MEM_READ, 13'd1200, 13'd1200);
    op = MEM_IDLE;
    checks++;
    if (q !== ~({C{xx}} ^ w)) begin
      failures++; $display("read row %0d x=%b: q=%h exp %h", r, xx, q, ~({C{xx}} ^ w));
    end
    @(posedge clk); #1;
    checks++;
    if (q !== '1) begin failures++; $display("precharge after read: q=%h", q); end
  endtask

  initial begin
    logic [C-1:0] w;
    op = MEM_IDLE; row = '0; col = '0; side = 1'b0; x = 1'b0; wdata = '0;
    vddc_mv = 13'd1200; vddr_mv = 13'd1200;
    repeat (2) @(posedge clk); #1;

    // pristine cells: equal resistances resolve to w = 0
    read_check(3, 1'b1, '0);
    read_check(3, 1'b0, '0);
    // programming a pristine row changes nothing
    program_row(3, '1);
    read_check(3, 1'b1, '0);

    // wrong supplies are refused
    row = 7'd5; col = 5'd2; side = 1'b0;
    cyc(MEM_FORM, 13'd2700, 13'd2700);
    checks++; if (op_err !== 1'b1) begin failures++; $display("form at 2.7 V not refused"); end
    cyc(MEM_IDLE, 13'd1200, 13'd1200);
    checks++; if (op_err !== 1'b0) begin failures++; $display("op_err not a pulse"); end

    // form and program 24 random rows, including the threshold rows
    for (int i = 0; i < 24; i++) begin
      int r;
      r = (i < 12) ? 116 + i : $urandom_range(0, 115);
      form_row(r);
      w = C'($urandom);
      program_row(r, w);
    end
    // RESET at the medium level only must be refused and leave the row untouched
    row = 7'd116; wdata = ~wref[116];
    cyc(MEM_RESET, 13'd2700, 13'd2700);
    checks++; if (op_err !== 1'b1) begin failures++; $display("reset at 2.7 V not refused"); end
    cyc(MEM_SET, 13'd4500, 13'd4500);
    checks++; if (op_err !== 1'b1) begin failures++; $display("set at 4.5 V not refused"); end
    op = MEM_IDLE;

    for (int r = 0; r < R; r++)
      if (r >= 116) begin
        read_check(r, 1'b1, wref[r]);
        read_check(r, 1'b0, wref[r]);
      end
    for (int k = 0; k < 200; k++) begin
      int r;
      r = 116 + $urandom_range(0, 11);
      read_check(r, 1'($urandom_range(0, 1)), wref[r]);
    end
    // reprogram with new weights
    for (int r = 116; r < 128; r++) begin
      program_row(r, C'($urandom));
      read_check(r, 1'b1, wref[r]);
      read_check(r, 1'b0, wref[r]);
    end
    // back-to-back reads, one per cycle
    for (int r = 116; r < 128; r++) begin
      row = 7'(r); x = 1'b1; op = MEM_READ; vddc_mv = 13'd1200; vddr_mv = 13'd1200;
      @(posedge clk); #1;
      checks++;
      if (q !== wref[r]) begin failures++; $display("pipelined read row %0d", r); end
    end
    op = MEM_IDLE;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
