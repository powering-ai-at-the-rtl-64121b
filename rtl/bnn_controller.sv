// bnn_controller: digital control unit (finite state machine) of the BNN core.
//
// It sequences the three operations of the chip for all four memory modules and
// drives the power switch and the neuron registers:
//
//   CMD_FORM   forms every memristor, one after the other: for each row, for each of
//              the 2*COLS memristors of the row, FORM_CYCLES cycles of MEM_FORM with
//              the power switch at PW_FORM.  All modules form the same address at once.
//   CMD_PROG   programs word line cmd_row of every module with the weights the top
//              latched from the host: PROG_CYCLES cycles of MEM_SET (PW_SET), then
//              PROG_CYCLES cycles of MEM_RESET (PW_RESET).  Each cell ends with one
//              memristor in LRS and the other in HRS.
//   CMD_INFER  pipelined inference.  Issue cycle 0 clears the neuron registers; then
//              the THR_BITS threshold rows (rows N_IN .. ROWS-1) are read with X = +1,
//              one per cycle, and bit k is written into every neuron register; then the
//              input rows 0 .. N_IN-1 are read one per cycle with the host's activation,
//              and every XNOR output decrements its neuron register.  A row waits
//              (stall) while x_valid is low.  In two-layer mode (two_layer = 1 when the
//              command is accepted) only modules 0 .. N_MOD/2-1 take the host inputs
//              (layer 1); after the pipeline drains, modules N_MOD/2 .. N_MOD-1 read rows
//              0 .. L2_IN-1 with the layer-1 activations, hidden[row], as inputs (layer 2).
//
// Timing: a read issued in cycle t is sensed in cycle t+1 and lands in the neuron
// registers at the end of t+1, so nu_op / nu_bit are the issue-stage controls delayed
// by one register.  Without stalls, done pulses THR_BITS + N_IN + 2 cycles after a
// single-layer CMD_INFER is accepted (130 at the default sizes) and
// THR_BITS + N_IN + L2_IN + 3 cycles after a two-layer one (195).  Commands are
// accepted with cmd_valid & cmd_ready (ready only when idle); done pulses at the end of
// every command.
//
// The paper gives the operations, the sequential forming, row-by-row programming,
// complementary programming, the pulse durations, the threshold rows read first and
// the one-row-per-cycle pipelined accumulation.  The command interface, the X stream
// handshake, the ordering SET before RESET and the way layer 2 is fed are this
// design's choices.
//
// Lint note: the concurrent assertions at the end use rst_n in `disable iff`, so a
// linter may report rst_n as both an asynchronous reset and a synchronous signal; the
// logic itself only uses it as the asynchronous reset.
module bnn_controller
  import bnn_pkg::*;
#(
  parameter int unsigned N_MOD_P       = N_MOD,
  parameter int unsigned ROWS_P        = ROWS,
  parameter int unsigned COLS_P        = COLS,
  parameter int unsigned N_IN_P        = N_IN,
  parameter int unsigned THR_BITS_P    = THR_BITS,
  parameter int unsigned L2_IN_P       = L2_IN,
  parameter int unsigned FORM_CYCLES_P = FORM_CYCLES,
  parameter int unsigned PROG_CYCLES_P = PROG_CYCLES
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host command
  input  logic                        cmd_valid,
  output logic                        cmd_ready,
  input  cmd_op_t                     cmd_op,
  input  logic [$clog2(ROWS_P)-1:0]   cmd_row,
  input  logic                        two_layer,
  // input activation stream
  input  logic                        x_valid,
  output logic                        x_ready,
  input  logic                        x_bit,
  output logic [$clog2(ROWS_P)-1:0]   x_idx,
  // layer-1 activations (two-layer mode)
  input  logic [L2_IN_P-1:0]          hidden,
  // memory modules
  output mem_op_t                     mem_op [N_MOD_P],
  output logic [$clog2(ROWS_P)-1:0]   mem_row,
  output logic [$clog2(COLS_P)-1:0]   mem_col,
  output logic                        mem_side,
  output logic [N_MOD_P-1:0]          mem_x,
  output pwr_mode_t                   pwr_mode,
  // neuron registers
  output nu_op_t                      nu_op [N_MOD_P],
  output logic [$clog2(THR_BITS_P)-1:0] nu_bit,
  // status
  output logic                        busy,
  output logic                        done
);

  localparam int unsigned RW = $clog2(ROWS_P);
  localparam int unsigned MW = $clog2(2 * COLS_P);   // memristor index in a row
  localparam int unsigned CW = (FORM_CYCLES_P > PROG_CYCLES_P) ?
                               $clog2(FORM_CYCLES_P + 1) : $clog2(PROG_CYCLES_P + 1);
  localparam int unsigned L1_MODS = N_MOD_P / 2;

  typedef enum logic [3:0] {
    S_IDLE, S_FORM, S_SET, S_RESET, S_THR, S_L1, S_DRAIN1, S_L2, S_DRAIN2, S_DONE
  } state_t;

  state_t                         state;
  logic [RW-1:0]                  row;
  logic [MW-1:0]                  mcell;    // memristor being formed in the row
  logic [CW-1:0]                  pcnt;     // pulse cycle counter
  logic [$clog2(THR_BITS_P)-1:0]  tbit;
  logic                           mode2;    // latched two-layer configuration

  // issue-stage neuron controls, delayed by one register to meet the sensed data
  nu_op_t                         nu_op_i [N_MOD_P];
  logic [$clog2(THR_BITS_P)-1:0]  nu_bit_i;

  logic accept;
  assign cmd_ready = (state == S_IDLE);
  assign accept    = cmd_valid && cmd_ready && (cmd_op != CMD_NOP);
  assign busy      = (state != S_IDLE);
  assign x_ready   = (state == S_L1);
  assign x_idx     = row;

  function automatic logic in_l1(input int unsigned m, input logic two);
    return !two || (m < L1_MODS);
  endfunction

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      row   <= '0;
      mcell <= '0;
      pcnt  <= '0;
      tbit  <= '0;
      mode2 <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (accept) begin
          pcnt <= '0;
          unique case (cmd_op)
            CMD_FORM:  begin state <= S_FORM; row <= '0; mcell <= '0; end
            CMD_PROG:  begin state <= S_SET;  row <= cmd_row; end
            default:   begin state <= S_THR;  tbit <= '0; mode2 <= two_layer; end
          endcase
        end
        S_FORM: begin
          if (pcnt == CW'(FORM_CYCLES_P - 1)) begin
            pcnt <= '0;
            if (mcell == MW'(2 * COLS_P - 1)) begin
              mcell <= '0;
              if (row == RW'(ROWS_P - 1)) begin
                row   <= '0;
                state <= S_DONE;
              end else begin
                row <= row + 1'b1;
              end
            end else begin
              mcell <= mcell + 1'b1;
            end
          end else begin
            pcnt <= pcnt + 1'b1;
          end
        end
        S_SET: begin
          if (pcnt == CW'(PROG_CYCLES_P - 1)) begin
            pcnt  <= '0;
            state <= S_RESET;
          end else pcnt <= pcnt + 1'b1;
        end
        S_RESET: begin
          if (pcnt == CW'(PROG_CYCLES_P - 1)) begin
            pcnt  <= '0;
            state <= S_DONE;
          end else pcnt <= pcnt + 1'b1;
        end
        S_THR: begin
          if (tbit == $bits(tbit)'(THR_BITS_P - 1)) begin
            tbit  <= '0;
            row   <= '0;
            state <= S_L1;
          end else tbit <= tbit + 1'b1;
        end
        S_L1: if (x_valid) begin
          if (row == RW'(N_IN_P - 1)) begin
            row   <= '0;
            state <= S_DRAIN1;
          end else row <= row + 1'b1;
        end
        S_DRAIN1: state <= mode2 ? S_L2 : S_DONE;
        S_L2: begin
          if (row == RW'(L2_IN_P - 1)) begin
            row   <= '0;
            state <= S_DRAIN2;
          end else row <= row + 1'b1;
        end
        S_DRAIN2: state <= S_DONE;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- issue-stage outputs ----------------
  logic [RW-1:0] thr_row;
  assign thr_row = RW'(N_IN_P) + RW'(tbit);

  always_comb begin
    for (int m = 0; m < int'(N_MOD_P); m++) begin
      mem_op[m]  = MEM_IDLE;
      nu_op_i[m] = NU_HOLD;
      mem_x[m]   = 1'b1;
    end
    mem_row  = row;
    mem_col  = mcell[MW-1:1];
    mem_side = mcell[0];
    pwr_mode = PW_READ;
    nu_bit_i = tbit;
    unique case (state)
      S_IDLE: if (accept && cmd_op == CMD_INFER)
        for (int m = 0; m < int'(N_MOD_P); m++) nu_op_i[m] = NU_CLR;
      S_FORM: begin
        pwr_mode = PW_FORM;
        for (int m = 0; m < int'(N_MOD_P); m++) mem_op[m] = MEM_FORM;
      end
      S_SET: begin
        pwr_mode = PW_SET;
        for (int m = 0; m < int'(N_MOD_P); m++) mem_op[m] = MEM_SET;
      end
      S_RESET: begin
        pwr_mode = PW_RESET;
        for (int m = 0; m < int'(N_MOD_P); m++) mem_op[m] = MEM_RESET;
      end
      S_THR: begin
        mem_row = thr_row;
        for (int m = 0; m < int'(N_MOD_P); m++) begin
          mem_op[m]  = MEM_READ;
          nu_op_i[m] = NU_LOAD;
        end
      end
      S_L1: if (x_valid)
        for (int m = 0; m < int'(N_MOD_P); m++)
          if (in_l1(m, mode2)) begin
            mem_op[m]  = MEM_READ;
            mem_x[m]   = x_bit;
            nu_op_i[m] = NU_ACC;
          end
      S_L2:
        for (int m = 0; m < int'(N_MOD_P); m++)
          if (!in_l1(m, mode2)) begin
            mem_op[m]  = MEM_READ;
            mem_x[m]   = hidden[row[$clog2(L2_IN_P)-1:0]];
            nu_op_i[m] = NU_ACC;
          end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < int'(N_MOD_P); m++) nu_op[m] <= NU_HOLD;
      nu_bit <= '0;
    end else begin
      nu_op  <= nu_op_i;
      nu_bit <= nu_bit_i;
    end
  end

  // ---------------- protocol rules ----------------
  // A command is only taken when the controller is idle.
  a_cmd_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready) |-> (state == S_IDLE));
  // Input activations are only consumed during the layer-1 rows.
  a_x_window: assert property (@(posedge clk) disable iff (!rst_n)
    x_ready |-> (state == S_L1 && row < RW'(N_IN_P)));
  // done is a single-cycle pulse.
  a_done_pulse: assert property (@(posedge clk) disable iff (!rst_n)
    done |=> !done);

endmodule
