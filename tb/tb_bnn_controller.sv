// tb_bnn_controller: self-checking test of the control unit, at reduced sizes.
//
// Sizes: 4 modules, 16 rows, 4 cells per row, 12 inputs, 4 threshold rows, layer-2
// fan-in 8, 3-cycle forming pulse, 2-cycle programming pulse.  A monitor logs every
// cycle's module commands and neuron-register commands; the test then checks:
//  - CMD_FORM visits every (row, memristor) of the array in order, each for exactly the
//    forming pulse length, with the power switch at PW_FORM;
//  - CMD_PROG gives the selected row SET pulses (PW_SET) then RESET pulses (PW_RESET);
//  - CMD_INFER clears the neuron registers, reads the threshold rows with X = +1 and
//    loads bit k from threshold row k, then reads input rows 0..11 with the host bits
//    (accumulate), stalling while x_valid is low; neuron commands trail the reads by one
//    cycle; in two-layer mode modules 2-3 then read rows 0..7 with X = hidden[row];
//  - done arrives THR+N_IN+2 cycles (single layer) and THR+N_IN+L2+3 cycles (two
//    layers) after the command when the host never stalls.
module tb_bnn_controller;
  import bnn_pkg::*;
  localparam int NM = 4, R = 16, C = 4, NI = 12, TB = 4, L2 = 8, FC = 3, PC = 2;
  localparam int RW = $clog2(R);

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid, cmd_ready, two_layer, x_valid, x_ready, x_bit, busy, done;
  cmd_op_t cmd_op;
  logic [RW-1:0] cmd_row, x_idx, mem_row;
  logic [L2-1:0] hidden;
  mem_op_t mem_op [NM];
  logic [$clog2(C)-1:0] mem_col;
  logic mem_side;
  logic [NM-1:0] mem_x;
  pwr_mode_t pwr_mode;
  nu_op_t nu_op [NM];
  logic [$clog2(TB)-1:0] nu_bit;
  int checks = 0, failures = 0;

  bnn_controller #(.N_MOD_P(NM), .ROWS_P(R), .COLS_P(C), .N_IN_P(NI), .THR_BITS_P(TB),
                   .L2_IN_P(L2), .FORM_CYCLES_P(FC), .PROG_CYCLES_P(PC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // issue one command and wait for done; returns cycles from acceptance to done
  task automatic run_cmd(input cmd_op_t op, input int r, input logic two, input int stall_pct,
                         output int cycles, input logic [NI-1:0] xin);
    cmd_op = op; cmd_row = RW'(r); two_layer = two; cmd_valid = 1'b1;
    cycles = 0;
    do begin @(posedge clk); cycles++; end while (!cmd_ready && cycles < 100);
    #1; cmd_valid = 1'b0;
    cycles = 0;
    while (!done && cycles < 100000) begin
      x_valid = ($urandom_range(0, 99) >= stall_pct);
      x_bit   = xin[x_idx];
      @(posedge clk); #1;
      cycles++;
    end
  endtask

  // per-cycle log
  typedef struct { mem_op_t op [NM]; logic [RW-1:0] row; logic [$clog2(C)-1:0] col;
                   logic side; logic [NM-1:0] x; pwr_mode_t pw; nu_op_t nu [NM];
                   logic [$clog2(TB)-1:0] nb; } rec_t;
  rec_t log_q [$];
  logic logging = 1'b0;
  always @(posedge clk) if (logging) begin
    automatic rec_t e;
    e.op = mem_op; e.row = mem_row; e.col = mem_col; e.side = mem_side; e.x = mem_x;
    e.pw = pwr_mode; e.nu = nu_op; e.nb = nu_bit;
    log_q.push_back(e);
  end

  initial begin
    int cyc, idx, exp_lat;
    logic [NI-1:0] xin;
    cmd_valid = 1'b0; cmd_op = CMD_NOP; cmd_row = '0; two_layer = 1'b0;
    x_valid = 1'b0; x_bit = 1'b0; hidden = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1'b1;
    @(posedge clk); #1;
    check(cmd_ready && !busy, "idle after reset");

    // ---- forming ----
    log_q.delete(); logging = 1'b1;
    run_cmd(CMD_FORM, 0, 1'b0, 0, cyc, '0);
    logging = 1'b0;
    idx = 0;
    while (idx < log_q.size() && log_q[idx].op[0] != MEM_FORM) idx++;
    for (int r = 0; r < R; r++)
      for (int mc = 0; mc < 2 * C; mc++)
        for (int p = 0; p < FC; p++) begin
          automatic rec_t e = log_q[idx++];
          check(e.op[0] == MEM_FORM && e.op[NM-1] == MEM_FORM && e.pw == PW_FORM &&
                e.row == RW'(r) && e.col == ($clog2(C))'(mc / 2) && e.side == 1'(mc % 2),
                $sformatf("form r=%0d m=%0d p=%0d", r, mc, p));
        end
    check(log_q[idx].op[0] != MEM_FORM, "forming stops after the last memristor");

    // ---- programming ----
    log_q.delete(); logging = 1'b1;
    run_cmd(CMD_PROG, 9, 1'b0, 0, cyc, '0);
    logging = 1'b0;
    idx = 0;
    while (idx < log_q.size() - 1 && log_q[idx].op[0] != MEM_SET) idx++;
    for (int p = 0; p < PC; p++) begin
      check(log_q[idx].op[0] == MEM_SET && log_q[idx].pw == PW_SET && log_q[idx].row == 9, "set pulse"); idx++;
    end
    for (int p = 0; p < PC; p++) begin
      check(log_q[idx].op[1] == MEM_RESET && log_q[idx].pw == PW_RESET && log_q[idx].row == 9, "reset pulse"); idx++;
    end
    check(log_q[idx].op[0] == MEM_IDLE, "programming ends");

    // ---- inference, both modes, with and without stalls ----
    for (int t = 0; t < 8; t++) begin
      automatic logic two;
      automatic int stall;
      two = 1'(t % 2);
      stall = (t < 2) ? 0 : 30;
      xin = NI'($urandom);
      hidden = L2'($urandom);
      log_q.delete(); logging = 1'b1;
      run_cmd(CMD_INFER, 0, two, stall, cyc, xin);
      logging = 1'b0;
      exp_lat = two ? TB + NI + L2 + 3 : TB + NI + 2;
      if (stall == 0) check(cyc == exp_lat, $sformatf("latency %0d exp %0d", cyc, exp_lat));
      // first logged record is the acceptance cycle: neuron clear lands one cycle later
      idx = 0;
      check(log_q[1].nu[0] == NU_CLR && log_q[1].nu[3] == NU_CLR, "clear");
      idx = 1;
      for (int k = 0; k < TB; k++) begin
        automatic rec_t e = log_q[idx], n = log_q[idx + 1];
        check(e.op[0] == MEM_READ && e.op[3] == MEM_READ && e.row == RW'(NI + k) && e.x == '1 &&
              n.nu[0] == NU_LOAD && n.nu[3] == NU_LOAD && n.nb == ($clog2(TB))'(k) && e.pw == PW_READ,
              $sformatf("threshold row %0d", k));
        idx++;
      end
      for (int i = 0; i < NI; i++) begin
        automatic rec_t e, n;
        while (idx < log_q.size() - 2 && log_q[idx].op[0] != MEM_READ) begin
          check(log_q[idx + 1].nu[0] == NU_HOLD, "hold during stall");
          idx++;
        end
        e = log_q[idx]; n = log_q[idx + 1];
        check(e.row == RW'(i) && e.x[0] == xin[i] && e.x[1] == xin[i] && n.nu[0] == NU_ACC,
              $sformatf("input row %0d", i));
        if (two) check(e.op[2] == MEM_IDLE && e.op[3] == MEM_IDLE && n.nu[3] == NU_HOLD, "layer 2 idle in layer 1");
        else     check(e.op[3] == MEM_READ && e.x[3] == xin[i] && n.nu[3] == NU_ACC, "module 3 in single layer");
        idx++;
      end
      if (two) begin
        while (idx < log_q.size() - 1 && log_q[idx].op[2] != MEM_READ) idx++;
        for (int i = 0; i < L2; i++) begin
          automatic rec_t e = log_q[idx], n = log_q[idx + 1];
          check(e.op[2] == MEM_READ && e.op[0] == MEM_IDLE && e.row == RW'(i) &&
                e.x[2] == hidden[i] && e.x[3] == hidden[i] && n.nu[2] == NU_ACC && n.nu[0] == NU_HOLD,
                $sformatf("layer-2 row %0d", i));
          idx++;
        end
      end
      check(log_q[idx].op[0] == MEM_IDLE && log_q[idx].op[2] == MEM_IDLE, "no read after the last row");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
