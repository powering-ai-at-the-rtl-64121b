// bnn_top: memristor binarized neural network core with near-memory computing.
//
// Four memory modules of 128 x 32 complementary 2T2R bit cells each hold the binary
// weights (rows 0 .. N_IN-1) and the neuron thresholds (rows N_IN .. ROWS-1, one bit
// per row).  Every bit-cell column has an XNOR sense amplifier and, right next to the
// array, its own neuron register with a population-count decounter (neuron_unit), so
// all 128 output neurons are computed in parallel and only their sign bits leave the
// arrays: y[m*COLS + c] is the activation of column c of module m.
//
// Configurations (selected per inference by two_layer):
//   two_layer = 0  one layer, 116 inputs -> 128 outputs (all modules share the input).
//   two_layer = 1  layer 1: modules 0-1, 116 inputs -> 64 outputs (y[63:0]);
//                  layer 2: modules 2-3, the 64 layer-1 outputs -> 64 outputs (y[127:64]).
//
// Host interface: commands (form all memristors / program one row / infer) are taken
// with cmd_valid & cmd_ready; the row weights of CMD_PROG come on cmd_data, bit
// m*COLS + c for column c of module m, and are latched when the command is accepted.
// During inference the core asks for input activation x_idx with x_ready and takes
// x_bit when x_valid is high (one per cycle at most).  done pulses at the end of every
// command; y is valid from then until the next inference starts.  op_err pulses when a
// module refused an operation because its supplies were wrong.  The supply pads VDD,
// VH and VM are millivolt-valued inputs routed by the power switch to the arrays.
//
// What follows the paper: four 8,192-memristor modules, complementary programming,
// XNOR in the sense amplifier, thresholds in dedicated rows loaded into neuron
// registers, decrementing popcount, sign-bit activation, fully pipelined one-row-per-
// cycle inference, the two configurations, the three power pads.  This design's own
// choices: the host interface and its widths, the 12 threshold rows, and feeding the
// second layer with rows 0-63 only.
module bnn_top
  import bnn_pkg::*;
#(
  parameter int unsigned N_MOD_P       = N_MOD,
  parameter int unsigned ROWS_P        = ROWS,
  parameter int unsigned COLS_P        = COLS,
  parameter int unsigned N_IN_P        = N_IN,
  parameter int unsigned THR_BITS_P    = THR_BITS,
  parameter int unsigned FORM_CYCLES_P = FORM_CYCLES,
  parameter int unsigned PROG_CYCLES_P = PROG_CYCLES
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cmd_valid,
  output logic                          cmd_ready,
  input  cmd_op_t                       cmd_op,
  input  logic [$clog2(ROWS_P)-1:0]     cmd_row,
  input  logic [N_MOD_P*COLS_P-1:0]     cmd_data,
  input  logic                          two_layer,
  input  logic                          x_valid,
  output logic                          x_ready,
  input  logic                          x_bit,
  output logic [$clog2(ROWS_P)-1:0]     x_idx,
  input  logic [12:0]                   vdd_mv,
  input  logic [12:0]                   vh_mv,
  input  logic [12:0]                   vm_mv,
  output logic [N_MOD_P*COLS_P-1:0]     y,
  output logic                          busy,
  output logic                          done,
  output logic                          op_err
);

  localparam int unsigned L2_IN_P = (N_MOD_P / 2) * COLS_P;

  mem_op_t                        mem_op [N_MOD_P];
  logic [$clog2(ROWS_P)-1:0]      mem_row;
  logic [$clog2(COLS_P)-1:0]      mem_col;
  logic                           mem_side;
  logic [N_MOD_P-1:0]             mem_x;
  pwr_mode_t                      pwr_mode;
  nu_op_t                         nu_op [N_MOD_P];
  logic [$clog2(THR_BITS_P)-1:0]  nu_bit;
  logic [12:0]                    vddc_mv, vddr_mv;
  logic [N_MOD_P*COLS_P-1:0]      wdata;
  logic [N_MOD_P-1:0]             mod_err;

  // row weights latched when a programming command is accepted
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wdata <= '0;
    else if (cmd_valid && cmd_ready && cmd_op == CMD_PROG) wdata <= cmd_data;
  end

  bnn_controller #(
    .N_MOD_P(N_MOD_P), .ROWS_P(ROWS_P), .COLS_P(COLS_P), .N_IN_P(N_IN_P),
    .THR_BITS_P(THR_BITS_P), .L2_IN_P(L2_IN_P),
    .FORM_CYCLES_P(FORM_CYCLES_P), .PROG_CYCLES_P(PROG_CYCLES_P)
  ) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_row, .two_layer,
    .x_valid, .x_ready, .x_bit, .x_idx,
    .hidden   (y[L2_IN_P-1:0]),
    .mem_op, .mem_row, .mem_col, .mem_side, .mem_x, .pwr_mode,
    .nu_op, .nu_bit,
    .busy, .done
  );

  power_switch u_pwr (
    .mode    (pwr_mode),
    .vdd_mv, .vh_mv, .vm_mv,
    .vddc_mv, .vddr_mv
  );

  for (genvar m = 0; m < int'(N_MOD_P); m++) begin : g_mod
    logic [COLS_P-1:0] q;

    memory_module #(.ROWS_P(ROWS_P), .COLS_P(COLS_P)) u_mem (
      .clk,
      .op      (mem_op[m]),
      .row     (mem_row),
      .col     (mem_col),
      .side    (mem_side),
      .wdata   (wdata[m*COLS_P +: COLS_P]),
      .x       (mem_x[m]),
      .vddc_mv, .vddr_mv,
      .q,
      .op_err  (mod_err[m])
    );

    for (genvar c = 0; c < int'(COLS_P); c++) begin : g_neuron
      logic signed [THR_BITS_P-1:0] value_unused;
      neuron_unit #(.W(THR_BITS_P)) u_nu (
        .clk, .rst_n,
        .op     (nu_op[m]),
        .ld_bit (nu_bit),
        .q      (q[c]),
        .act    (y[m*COLS_P + c]),
        .value  (value_unused)
      );
    end
  end

  assign op_err = |mod_err;

endmodule
