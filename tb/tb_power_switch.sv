// tb_power_switch: self-checking test of the power switch unit model.
//
// For each mode and random pad voltages it checks which pad reaches VDDC and VDDR:
// forming VH/VM, RESET (to HRS) VM/VH, SET (to LRS) VM/VM, read VDD/VDD.
module tb_power_switch;
  import bnn_pkg::*;
  pwr_mode_t mode;
  logic [12:0] vdd_mv, vh_mv, vm_mv, vddc_mv, vddr_mv;
  int checks = 0, failures = 0;

  power_switch dut (.mode, .vdd_mv, .vh_mv, .vm_mv, .vddc_mv, .vddr_mv);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [12:0] ec, er;
    for (int i = 0; i < 400; i++) begin
      vdd_mv = 13'($urandom_range(600, 1300));
      vh_mv  = 13'($urandom_range(3000, 5000));
      vm_mv  = 13'($urandom_range(2000, 2999));
      mode   = pwr_mode_t'(i % 4);
      #1;
      case (i % 4)
        1:       begin ec = vh_mv;  er = vm_mv;  end
        2:       begin ec = vm_mv;  er = vm_mv;  end
        3:       begin ec = vm_mv;  er = vh_mv;  end
        default: begin ec = vdd_mv; er = vdd_mv; end
      endcase
      checks++;
      if (vddc_mv !== ec || vddr_mv !== er) begin
        failures++; $display("mode %0d: vddc=%0d vddr=%0d exp %0d %0d", i % 4, vddc_mv, vddr_mv, ec, er);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
