// memory_module: behavioural model of one full-custom memristor memory module.
//
// Behavioural model of a mixed-signal macro: 128 word lines x 32 two-transistor /
// two-memristor (2T2R) bit cells, 8,192 hafnium-oxide memristors, with the word-line,
// bit-line and source-line drivers, their level shifters, and one XNOR precharge
// sense amplifier (xpcsa) per bit-cell column.  Each memristor is modelled by its
// resistance in kilo-ohms: pristine (never formed), LRS or HRS.  A bit cell stores the
// weight w = 1 as BL in LRS / BLb in HRS and w = 0 as the opposite; the two memristors
// are always programmed in a complementary way.
//
// Operations, applied on the rising clock edge while op holds them:
//   MEM_FORM   forms memristor (row, col, side) -> LRS; needs VDDC >= 4.0 V and
//              VDDR >= 2.4 V (4.5 V / 2.7 V nominal).  Memristors are formed one at a time.
//   MEM_SET    in word line `row`, sets to LRS the BL memristor of every cell with
//              wdata = 1 and the BLb memristor of every cell with wdata = 0; needs
//              VDDC and VDDR at the medium level (2.4 V ... 4.0 V).
//   MEM_RESET  in word line `row`, resets to HRS the BL memristor of every cell with
//              wdata = 0 and the BLb memristor of every cell with wdata = 1; needs
//              VDDR >= 4.0 V and VDDC >= 2.4 V.
//   MEM_READ   registers row and x; during the next cycle the sense amplifiers of the
//              row evaluate and q holds XNOR(x, w) for the 32 cells.
// A SET or RESET does not change a pristine memristor.  An operation issued with the
// wrong supply levels changes nothing and raises op_err for one cycle (registered).
// Timing: q is valid in the cycle after MEM_READ is presented and is all ones
// (precharge) in any other cycle.  The memristors keep their state without reset
// (non-volatile); they start pristine.
//
// The paper gives the array size, the complementary 2T2R scheme, the XNOR sense
// amplifier and the supply levels of each operation.  The voltage windows accepted
// here, the resistance values and the one-cycle read timing are this model's choices.
module memory_module
  import bnn_pkg::*;
#(
  parameter int unsigned ROWS_P = ROWS,
  parameter int unsigned COLS_P = COLS
) (
  input  logic                      clk,
  input  mem_op_t                   op,
  input  logic [$clog2(ROWS_P)-1:0] row,
  input  logic [$clog2(COLS_P)-1:0] col,     // forming: bit cell
  input  logic                      side,    // forming: 0 = BL memristor, 1 = BLb
  input  logic [COLS_P-1:0]         wdata,   // programming: weights of the row
  input  logic                      x,       // read: input activation (1 = +1)
  input  logic [12:0]               vddc_mv,
  input  logic [12:0]               vddr_mv,
  output logic [COLS_P-1:0]         q,       // XNOR outputs of the sensed row
  output logic                      op_err
);

  logic [15:0] r_bl  [ROWS_P][COLS_P];
  logic [15:0] r_blb [ROWS_P][COLS_P];

  logic [$clog2(ROWS_P)-1:0] row_q;
  logic                      x_q;
  logic                      se_q;

  logic form_ok, set_ok, reset_ok;
  assign form_ok  = (vddc_mv >= 13'(V_FORM_MIN_MV)) && (vddr_mv >= 13'(V_PROG_MIN_MV));
  assign set_ok   = (vddc_mv >= 13'(V_PROG_MIN_MV)) && (vddc_mv < 13'(V_HIGH_MIN_MV)) &&
                    (vddr_mv >= 13'(V_PROG_MIN_MV)) && (vddr_mv < 13'(V_HIGH_MIN_MV));
  assign reset_ok = (vddr_mv >= 13'(V_HIGH_MIN_MV)) && (vddc_mv >= 13'(V_PROG_MIN_MV));

  initial begin
    for (int r = 0; r < int'(ROWS_P); r++)
      for (int c = 0; c < int'(COLS_P); c++) begin
        r_bl[r][c]  = R_PRISTINE_KOHM;
        r_blb[r][c] = R_PRISTINE_KOHM;
      end
    se_q   = 1'b0;
    row_q  = '0;
    x_q    = 1'b0;
    op_err = 1'b0;
  end

  always @(posedge clk) begin
    se_q   <= (op == MEM_READ);
    op_err <= 1'b0;
    if (op == MEM_READ) begin
      row_q <= row;
      x_q   <= x;
    end
    unique case (op)
      MEM_FORM: begin
        if (!form_ok) op_err <= 1'b1;
        else if (!side) r_bl[row][col]  <= R_LRS_KOHM;
        else            r_blb[row][col] <= R_LRS_KOHM;
      end
      MEM_SET: begin
        if (!set_ok) op_err <= 1'b1;
        else
          for (int c = 0; c < int'(COLS_P); c++) begin
            if (wdata[c]  && r_bl[row][c]  != R_PRISTINE_KOHM) r_bl[row][c]  <= R_LRS_KOHM;
            if (!wdata[c] && r_blb[row][c] != R_PRISTINE_KOHM) r_blb[row][c] <= R_LRS_KOHM;
          end
      end
      MEM_RESET: begin
        if (!reset_ok) op_err <= 1'b1;
        else
          for (int c = 0; c < int'(COLS_P); c++) begin
            if (!wdata[c] && r_bl[row][c]  != R_PRISTINE_KOHM) r_bl[row][c]  <= R_HRS_KOHM;
            if (wdata[c]  && r_blb[row][c] != R_PRISTINE_KOHM) r_blb[row][c] <= R_HRS_KOHM;
          end
      end
      default: ;
    endcase
  end

  for (genvar c = 0; c < int'(COLS_P); c++) begin : g_sa
    logic qb_unused;
    xpcsa u_sa (
      .se    (se_q),
      .x     (x_q),
      .r_bl  (r_bl[row_q][c]),
      .r_blb (r_blb[row_q][c]),
      .q     (q[c]),
      .qb    (qb_unused)
    );
  end

endmodule
