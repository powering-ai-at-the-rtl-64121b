// tb_preactivation_sweep: accuracy-characterization workload on the full-size core.
//
// Reproduces, in simulation, the test pattern used to characterize the fabricated
// chip: weights and an input vector are programmed, then for each preactivation
// Delta = popcount - T in -5 .. +5 the threshold rows of all 128 neurons are
// reprogrammed so that every neuron sits exactly at that Delta, and one single-layer
// inference is run.  With ideal memristors every output must be correct: +1 for
// Delta > 0 and -1 for Delta <= 0 (the activation is the sign bit of T - popcount).
// Pass 1 uses ideal cells: the expected accuracy is 100 % at every Delta.
// Pass 2 mimics weakly programmed cells: in every column of every module, E_WEAK
// weight cells of the input rows get their two resistances swapped (read as the wrong
// weight).  Each such cell moves the popcount by one, so an output can only be wrong
// when |Delta| is small: the test predicts every output exactly from the known flipped
// cells, prints the accuracy per Delta, and checks that no neuron with Delta > E_WEAK
// or Delta <= -E_WEAK is wrong -- the graceful, approximate-computing behaviour the
// chip shows when its supply is weak.
module tb_preactivation_sweep;
  import bnn_pkg::*;
  localparam int NM = N_MOD, R = ROWS, C = COLS, NI = N_IN, TB = THR_BITS;
  localparam int RW = $clog2(R);
  localparam int E_WEAK = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid, cmd_ready, two_layer, x_valid, x_ready, x_bit, busy, done, op_err;
  cmd_op_t cmd_op;
  logic [RW-1:0] cmd_row, x_idx;
  logic [NM*C-1:0] cmd_data, y;
  logic [12:0] vdd_mv, vh_mv, vm_mv;

  bnn_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #200ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [C-1:0] W [NM][R];
  int           P [NM][C];
  int           Shift [NM][C];   // popcount change caused by flipped cells
  logic [NI-1:0] X;

  task automatic cmd(input cmd_op_t op, input int r, input logic [NM*C-1:0] d);
    int cycles = 0;
    cmd_op = op; cmd_row = RW'(r); cmd_data = d; two_layer = 1'b0; cmd_valid = 1'b1;
    do begin @(posedge clk); cycles++; end while (!cmd_ready && cycles < 100);
    #1; cmd_valid = 1'b0;
    cycles = 0;
    while (!done && cycles < 6000000) begin
      x_valid = 1'b1;
      x_bit   = X[x_idx];
      @(posedge clk); #1;
      cycles++;
    end
    x_valid = 1'b0;
  endtask

  // swap the two memristors of cell (m, r, c): the cell now reads as the opposite weight
  task automatic weaken(input int m, input int r, input int c);
    logic [15:0] t;
    case (m)
      0: begin t = dut.g_mod[0].u_mem.r_bl[r][c]; dut.g_mod[0].u_mem.r_bl[r][c] = dut.g_mod[0].u_mem.r_blb[r][c]; dut.g_mod[0].u_mem.r_blb[r][c] = t; end
      1: begin t = dut.g_mod[1].u_mem.r_bl[r][c]; dut.g_mod[1].u_mem.r_bl[r][c] = dut.g_mod[1].u_mem.r_blb[r][c]; dut.g_mod[1].u_mem.r_blb[r][c] = t; end
      2: begin t = dut.g_mod[2].u_mem.r_bl[r][c]; dut.g_mod[2].u_mem.r_bl[r][c] = dut.g_mod[2].u_mem.r_blb[r][c]; dut.g_mod[2].u_mem.r_blb[r][c] = t; end
      default: begin t = dut.g_mod[3].u_mem.r_bl[r][c]; dut.g_mod[3].u_mem.r_bl[r][c] = dut.g_mod[3].u_mem.r_blb[r][c]; dut.g_mod[3].u_mem.r_blb[r][c] = t; end
    endcase
  endtask

  function automatic logic [NM*C-1:0] row_word(input int r);
    logic [NM*C-1:0] d;
    for (int m = 0; m < NM; m++) d[m*C +: C] = W[m][r];
    return d;
  endfunction

  initial begin
    int correct;
    cmd_valid = 1'b0; cmd_op = CMD_NOP; cmd_row = '0; cmd_data = '0; two_layer = 1'b0;
    x_valid = 1'b0; x_bit = 1'b0;
    vdd_mv = 13'd1200; vh_mv = 13'd4500; vm_mv = 13'd2700;
    repeat (3) @(posedge clk); #1 rst_n = 1'b1;

    cmd(CMD_FORM, 0, '0);
    X = {4{29'($urandom)}};
    for (int m = 0; m < NM; m++)
      for (int r = 0; r < NI; r++) W[m][r] = C'($urandom);
    for (int m = 0; m < NM; m++)
      for (int c = 0; c < C; c++) begin
        P[m][c] = 0;
        for (int i = 0; i < NI; i++) P[m][c] += (X[i] ~^ W[m][i][c]) ? 1 : 0;
      end
    for (int r = 0; r < NI; r++) cmd(CMD_PROG, r, row_word(r));

    for (int pass = 0; pass < 2; pass++) begin
    if (pass == 1) begin
      // inject E_WEAK flipped cells per column, distinct rows
      for (int m = 0; m < NM; m++)
        for (int c = 0; c < C; c++) begin
          int r0, r1;
          r0 = $urandom_range(0, NI - 1);
          r1 = (r0 + 1 + $urandom_range(0, NI - 2)) % NI;
          Shift[m][c] = 0;
          for (int k = 0; k < E_WEAK; k++) begin
            automatic int r = (k == 0) ? r0 : r1;
            weaken(m, r, c);
            // the flipped cell now contributes the opposite XNOR
            Shift[m][c] += (X[r] ~^ W[m][r][c]) ? -1 : 1;
          end
        end
    end
    for (int delta = -5; delta <= 5; delta++) begin
      for (int k = 0; k < TB; k++)
        for (int m = 0; m < NM; m++)
          for (int c = 0; c < C; c++) W[m][NI + k][c] = 1'(((P[m][c] - delta) >>> k) & 1);
      for (int k = 0; k < TB; k++) cmd(CMD_PROG, NI + k, row_word(NI + k));
      vh_mv = 13'd1200; vm_mv = 13'd1200;      // all pads on one supply for inference
      cmd(CMD_INFER, 0, '0);
      vh_mv = 13'd4500; vm_mv = 13'd2700;
      correct = 0;
      for (int j = 0; j < NM * C; j++) begin
        automatic int m = j / C, c = j % C;
        automatic logic ideal = (delta > 0);
        automatic logic pred  = (pass == 0) ? ideal : ((delta + Shift[m][c]) > 0);
        checks++;
        if (y[j] !== pred) begin
          failures++;
          $display("pass %0d delta %0d neuron %0d: y=%b predicted %b", pass, delta, j, y[j], pred);
        end
        if (y[j] === ideal) correct++;
        else if (delta > E_WEAK || delta <= -E_WEAK) begin
          checks++; failures++;
          $display("error at large preactivation %0d, neuron %0d", delta, j);
        end
      end
      $display("%s cells, preactivation %0d: %0d of %0d neurons correct",
               (pass == 0) ? "ideal" : "weak ", delta, correct, NM * C);
    end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
