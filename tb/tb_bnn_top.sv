// tb_bnn_top: end-to-end test of the BNN core at its full default size.
//
// The core is instantiated without parameter overrides (4 modules x 128 rows x 32 cells,
// 116 inputs, 12 threshold rows, 660-cycle forming and 396-cycle programming pulses).
// The test plays the host:
//  1. forms all 32,768 memristors (VH = 4.5 V, VM = 2.7 V);
//  2. programs random weights into rows 0..115 and thresholds into rows 116..127, row
//     by row; the thresholds are picked around each neuron's expected popcount so that
//     preactivations -5 .. +5 occur, as in the accuracy experiments;
//  3. tries to program a row with all pads tied to VDD (the solar-cell setting):
//     the core must flag op_err and keep the old weights;
//  4. runs single-layer (116 -> 128) and two-layer (116 -> 64 -> 64) inferences, with
//     and without host stalls, and power-cycles the core (reset) between inferences to
//     show the weights survive;
//  5. compares y with  sign(popcount(XNOR(W, X)) - T)  computed here (activation +1 iff
//     popcount > T), and checks the inference latency (130 and 195 cycles when the
//     host never stalls).
// Each mechanism (forming, SET, RESET, refused programming, threshold load,
// accumulation, stall, single-layer and two-layer mode, power cycle) is counted; one
// that never happened counts as a failure.
module tb_bnn_top;
  import bnn_pkg::*;
  localparam int NM = N_MOD, R = ROWS, C = COLS, NI = N_IN, TB = THR_BITS;
  localparam int L2 = (NM / 2) * C;
  localparam int RW = $clog2(R);

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid, cmd_ready, two_layer, x_valid, x_ready, x_bit, busy, done, op_err;
  cmd_op_t cmd_op;
  logic [RW-1:0] cmd_row, x_idx;
  logic [NM*C-1:0] cmd_data, y;
  logic [12:0] vdd_mv, vh_mv, vm_mv;

  bnn_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_form = 0, n_set = 0, n_reset = 0, n_refused = 0, n_thr = 0, n_acc = 0;
  int n_stall = 0, n_single = 0, n_two = 0, n_power_cycle = 0;

  initial begin
    #200ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.mem_op[0] == MEM_FORM)  n_form++;
    if (dut.u_ctrl.mem_op[0] == MEM_SET)   n_set++;
    if (dut.u_ctrl.mem_op[0] == MEM_RESET) n_reset++;
    if (dut.u_ctrl.nu_op[0] == NU_LOAD)    n_thr++;
    if (dut.u_ctrl.nu_op[0] == NU_ACC || dut.u_ctrl.nu_op[NM-1] == NU_ACC) n_acc++;
    if (x_ready && !x_valid)               n_stall++;
    if (op_err)                            n_refused++;
  end

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // weights (1 = +1) and thresholds of the reference model
  logic [C-1:0] W [NM][R];
  int           T [NM][C];
  logic [NI-1:0] X;

  task automatic cmd(input cmd_op_t op, input int r, input logic [NM*C-1:0] d,
                     input logic two, input int stall_pct, output int cycles);
    cycles = 0;
    cmd_op = op; cmd_row = RW'(r); cmd_data = d; two_layer = two; cmd_valid = 1'b1;
    do begin @(posedge clk); cycles++; end while (!cmd_ready && cycles < 100);
    #1; cmd_valid = 1'b0;
    cycles = 0;
    while (!done && cycles < 6000000) begin
      x_valid = ($urandom_range(0, 99) >= stall_pct);
      x_bit   = X[x_idx];
      @(posedge clk); #1;
      cycles++;
    end
    x_valid = 1'b0;
  endtask

  function automatic logic [NM*C-1:0] row_word(input int r);
    logic [NM*C-1:0] d;
    for (int m = 0; m < NM; m++) d[m*C +: C] = W[m][r];
    return d;
  endfunction

  function automatic int popcnt(input int m, input int c, input logic [NI-1:0] xv, input int n);
    int p = 0;
    for (int i = 0; i < n; i++) p += (xv[i] ~^ W[m][i][c]) ? 1 : 0;
    return p;
  endfunction

  // expected activations; hidden = layer-1 outputs in two-layer mode
  function automatic logic [NM*C-1:0] expect_y(input logic two);
    logic [NM*C-1:0] e;
    logic [NI-1:0] h;
    for (int m = 0; m < NM; m++)
      for (int c = 0; c < C; c++)
        e[m*C + c] = (popcnt(m, c, X, NI) > T[m][c]);
    if (two) begin
      h = '0;
      for (int i = 0; i < L2; i++) h[i] = e[i];
      for (int m = NM / 2; m < NM; m++)
        for (int c = 0; c < C; c++)
          e[m*C + c] = (popcnt(m, c, h, L2) > T[m][c]);
    end
    return e;
  endfunction

  initial begin
    int cyc;
    logic [NM*C-1:0] ey;
    logic [NI-1:0] Xref;
    logic [L2-1:0] hidden_ref;
    cmd_valid = 1'b0; cmd_op = CMD_NOP; cmd_row = '0; cmd_data = '0; two_layer = 1'b0;
    x_valid = 1'b0; x_bit = 1'b0;
    vdd_mv = 13'd1200; vh_mv = 13'd4500; vm_mv = 13'd2700;
    repeat (3) @(posedge clk); #1 rst_n = 1'b1;

    // ---- 1. forming ----
    cmd(CMD_FORM, 0, '0, 1'b0, 0, cyc);
    check(cyc == R * 2 * C * FORM_CYCLES + 1, $sformatf("forming took %0d cycles", cyc));
    check(!op_err, "forming accepted");

    // ---- 2. programming ----
    // thresholds chosen around the expected popcount for a reference input Xref
    Xref = {4{29'($urandom)}};
    for (int m = 0; m < NM; m++)
      for (int r = 0; r < NI; r++) W[m][r] = C'($urandom);
    X = Xref;
    for (int m = 0; m < NM; m++)
      for (int c = 0; c < C; c++) begin
        int p;
        p = popcnt(m, c, Xref, NI);
        T[m][c] = p - ((c % 11) - 5);            // preactivation -5 .. +5 for Xref
      end
    // layer-2 thresholds: around the popcount seen with the layer-1 outputs for Xref
    ey = expect_y(1'b0);
    hidden_ref = ey[L2-1:0];
    for (int m = NM / 2; m < NM; m++)
      for (int c = 0; c < C; c++) begin
        automatic int p = 0;
        for (int i = 0; i < L2; i++) p += (hidden_ref[i] ~^ W[m][i][c]) ? 1 : 0;
        T[m][c] = p - ((c % 11) - 5);
      end
    // the threshold words are stored in rows NI .. NI+TB-1 (two's complement bit k in row NI+k)
    for (int k = 0; k < TB; k++)
      for (int m = 0; m < NM; m++)
        for (int c = 0; c < C; c++) W[m][NI + k][c] = 1'((T[m][c] >>> k) & 1);
    for (int r = 0; r < R; r++) begin
      cmd(CMD_PROG, r, row_word(r), 1'b0, 0, cyc);
      if (r == 0) check(cyc == 2 * PROG_CYCLES + 1, $sformatf("programming took %0d cycles", cyc));
    end

    // ---- 3. programming refused with all pads at VDD ----
    vh_mv = 13'd1200; vm_mv = 13'd1200;
    cmd(CMD_PROG, 0, ~row_word(0), 1'b0, 0, cyc);
    check(n_refused > 0, "programming at VDD flagged");

    // ---- 4/5. inferences, pads tied to VDD as when powered by the solar cell ----
    for (int t = 0; t < 12; t++) begin
      logic two;
      int stall;
      two   = 1'(t % 2);
      stall = (t < 4) ? 0 : 25;
      X = (t < 2) ? Xref : {4{29'($urandom)}};
      if (t == 6) begin
        // power cycle: the core is reset, the memristors keep their states
        rst_n = 1'b0; repeat (3) @(posedge clk); #1 rst_n = 1'b1;
        n_power_cycle++;
      end
      cmd(CMD_INFER, 0, '0, two, stall, cyc);
      if (stall == 0)
        check(cyc == (two ? TB + NI + L2 + 3 : TB + NI + 2), $sformatf("inference latency %0d", cyc));
      ey = expect_y(two);
      check(y == ey, $sformatf("inference %0d (two_layer=%0d): y=%h exp %h", t, two, y, ey));
      if (two) n_two++; else n_single++;
    end

    check(n_form > 0, "forming happened");
    check(n_set > 0 && n_reset > 0, "SET and RESET happened");
    check(n_refused > 0, "refused operation happened");
    check(n_thr > 0 && n_acc > 0, "threshold load and accumulation happened");
    check(n_stall > 0, "input stall happened");
    check(n_single > 0 && n_two > 0, "both configurations ran");
    check(n_power_cycle > 0, "power cycle happened");
    $display("mechanisms: form=%0d set=%0d reset=%0d refused=%0d thr=%0d acc=%0d stall=%0d single=%0d two=%0d power_cycle=%0d",
             n_form, n_set, n_reset, n_refused, n_thr, n_acc, n_stall, n_single, n_two, n_power_cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
