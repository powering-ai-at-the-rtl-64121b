// bnn_pkg: types and constants shared by the memristor binarized neural network core.
//
// The core computes  X_out,j = sign( popcount( XNOR(W_ji, X_in,i) ) - T_j )  with
// weights stored in complementary memristor pairs (2T2R bit cells).  This package
// holds the array geometry of the main configuration (four modules of 128 rows x 32
// bit cells = 8,192 memristors each), the operation encodings exchanged between the
// controller, the memory modules and the power switch, and the supply levels, in
// millivolts, that the programming operations need.
//
// The geometry and the voltages are the ones of the fabricated chip.  The encodings,
// the threshold width and the 66 MHz reference used to turn the pulse durations into
// cycle counts are choices of this design.
package bnn_pkg;

  // ---- geometry (main configuration) ----
  localparam int unsigned N_MOD    = 4;    // memory modules on the die
  localparam int unsigned ROWS     = 128;  // word lines per array
  localparam int unsigned COLS     = 32;   // bit cells (= output neurons) per array row
  localparam int unsigned N_IN     = 116;  // input neurons (one row each)
  localparam int unsigned THR_BITS = 12;   // threshold rows, ROWS - N_IN, two's complement
  localparam int unsigned L2_IN    = 64;   // fan-in of the second layer in two-layer mode

  // ---- pulse durations at the 66 MHz reference clock ----
  localparam int unsigned FORM_CYCLES = 660;  // 10 us forming pulse
  localparam int unsigned PROG_CYCLES = 396;  //  6 us SET / RESET pulse

  // ---- supply levels (mV) ----
  localparam int unsigned V_FORM_MIN_MV = 4000; // VDDC needed to form (4.5 V nominal)
  localparam int unsigned V_PROG_MIN_MV = 2400; // VM level used to SET / bias (2.7 V nominal)
  localparam int unsigned V_HIGH_MIN_MV = 4000; // VDDR needed to RESET (4.5 V nominal)

  // Operation applied to a memory module (word line / bit line / source line biasing).
  typedef enum logic [2:0] {
    MEM_IDLE  = 3'd0,
    MEM_FORM  = 3'd1,  // form one memristor (pristine -> LRS)
    MEM_SET   = 3'd2,  // program selected memristors of a row to LRS
    MEM_RESET = 3'd3,  // program selected memristors of a row to HRS
    MEM_READ  = 3'd4   // XNOR-augmented sense of one row
  } mem_op_t;

  // Setting of the power switch unit.
  typedef enum logic [1:0] {
    PW_READ  = 2'd0,   // VDDC = VDDR = VDD
    PW_FORM  = 2'd1,   // VDDC = VH, VDDR = VM
    PW_SET   = 2'd2,   // VDDC = VM, VDDR = VM
    PW_RESET = 2'd3    // VDDC = VM, VDDR = VH
  } pwr_mode_t;

  // Host command.
  typedef enum logic [1:0] {
    CMD_NOP   = 2'd0,
    CMD_FORM  = 2'd1,  // form every memristor of the chip
    CMD_PROG  = 2'd2,  // program one row of all modules
    CMD_INFER = 2'd3   // run one inference
  } cmd_op_t;

  // Action of the neuron registers in a cycle.
  typedef enum logic [1:0] {
    NU_HOLD = 2'd0,
    NU_CLR  = 2'd1,    // clear the register before threshold loading
    NU_LOAD = 2'd2,    // write one threshold bit (the sensed weight)
    NU_ACC  = 2'd3     // decrement by the XNOR output
  } nu_op_t;

  // Memristor resistance states (behavioural model), in kilo-ohms.
  localparam logic [15:0] R_PRISTINE_KOHM = 16'd60000;
  localparam logic [15:0] R_LRS_KOHM      = 16'd5;
  localparam logic [15:0] R_HRS_KOHM      = 16'd100;

endpackage
