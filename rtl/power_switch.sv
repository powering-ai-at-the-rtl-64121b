// power_switch: behavioural model of the power switch unit of the power management unit.
//
// Behavioural model: the real part is a set of full-custom thick-oxide switches
// sustaining up to 4.5 V.  Here the supply rails are carried as millivolt integers.
// The unit connects the two array supply domains of every memory module, VDDC and
// VDDR, to one of the three power pads according to the operation in progress:
//
//   mode      VDDC   VDDR     nominal
//   PW_FORM   VH     VM       4.5 V / 2.7 V   forming
//   PW_RESET  VM     VH       2.7 V / 4.5 V   program to HRS
//   PW_SET    VM     VM       2.7 V / 2.7 V   program to LRS
//   PW_READ   VDD    VDD      1.2 V ... 0.7 V inference
//
// The table follows the supply settings the paper gives for forming, HRS and LRS
// programming and the pad names VDD, VH and VM.  Connecting both domains to VDD when
// reading is this design's assumption (the paper ties all three pads to the same
// source for inference).  Combinational: the new rails appear in the cycle the mode
// changes; no settling time is modelled.
module power_switch
  import bnn_pkg::*;
(
  input  pwr_mode_t   mode,
  input  logic [12:0] vdd_mv,   // digital / read supply pad
  input  logic [12:0] vh_mv,    // high-voltage pad (4.5 V when forming or resetting)
  input  logic [12:0] vm_mv,    // medium-voltage pad (2.7 V)
  output logic [12:0] vddc_mv,  // array domain VDDC
  output logic [12:0] vddr_mv   // array domain VDDR
);

  always_comb begin
    unique case (mode)
      PW_FORM:  begin vddc_mv = vh_mv;  vddr_mv = vm_mv;  end
      PW_RESET: begin vddc_mv = vm_mv;  vddr_mv = vh_mv;  end
      PW_SET:   begin vddc_mv = vm_mv;  vddr_mv = vm_mv;  end
      default:  begin vddc_mv = vdd_mv; vddr_mv = vdd_mv; end
    endcase
  end

endmodule
