// tb_xpcsa: self-checking test of the XNOR precharge sense amplifier model.
//
// Draws LRS and HRS resistances over wide, overlapping-free ranges (device variability),
// places them on either branch, and checks that during precharge both outputs are high
// and during evaluation q = XNOR(x, w) with w = 1 when the BL branch has the lower
// resistance, qb being its complement.
module tb_xpcsa;
  logic se, x, q, qb;
  logic [15:0] r_bl, r_blb;
  int checks = 0, failures = 0;

  xpcsa dut (.se, .x, .r_bl, .r_blb, .q, .qb);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic w, expq;
    logic [15:0] lrs, hrs;
    for (int i = 0; i < 2000; i++) begin
      lrs = 16'($urandom_range(1, 39));
      hrs = 16'($urandom_range(40, 400));
      w   = 1'($urandom_range(0, 1));
      x   = 1'($urandom_range(0, 1));
      r_bl  = w ? lrs : hrs;
      r_blb = w ? hrs : lrs;
      se = 1'b0; #5;
      checks++;
      if (q !== 1'b1 || qb !== 1'b1) begin failures++; $display("precharge: q=%b qb=%b", q, qb); end
      se = 1'b1; #5;
      expq = ~(x ^ w);
      checks++;
      if (q !== expq || qb !== ~expq) begin
        failures++; $display("eval x=%b w=%b rbl=%0d rblb=%0d q=%b qb=%b", x, w, r_bl, r_blb, q, qb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
