// neuron_unit: one output neuron -- neuron register plus population-count decounter.
//
// The neuron register holds  R = T - popcount  in two's complement.  Before an
// inference it is cleared, then the threshold T, stored bit by bit in the dedicated
// threshold rows of the memristor array, is written into it one bit per cycle (NU_LOAD
// with bit index ld_bit; the sense amplifier is driven with X = +1 so its output is the
// stored bit).  During the input rows every XNOR output q = 1 decrements the register
// (NU_ACC): this is the population count, done as a count-down so that no separate
// subtraction is needed at the end.  The activation is the sign bit of the register:
// act = 1 (+1) when popcount > T, act = 0 (-1) otherwise.
//
// Interface: op / ld_bit / q are sampled on the rising clock edge; act and value are
// register outputs, valid the cycle after the last NU_ACC.  One row per cycle.
//
// Follows the paper: threshold rows read into the neuron register, decrement by the
// XNOR outputs, sign bit as activation.  Own choices: the 12-bit register width, the
// bit-serial threshold load and the sign(0) = -1 convention that taking the plain sign
// bit implies (a host wanting sign(0) = +1 stores T - 1).  The register is not clock
// gated, as in the fabricated chip.
module neuron_unit
  import bnn_pkg::*;
#(
  parameter int unsigned W = THR_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  nu_op_t               op,
  input  logic [$clog2(W)-1:0] ld_bit,
  input  logic                 q,       // sense amplifier output for this column
  output logic                 act,     // binary activation (1 = +1)
  output logic signed [W-1:0]  value    // current register value T - popcount
);

  logic signed [W-1:0] r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0;
    end else begin
      unique case (op)
        NU_CLR:  r <= '0;
        NU_LOAD: r[ld_bit] <= q;
        NU_ACC:  r <= r - W'(q);
        default: r <= r;
      endcase
    end
  end

  assign value = r;
  assign act   = r[W-1];

endmodule
