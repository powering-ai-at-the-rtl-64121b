// tb_neuron_unit: self-checking test of one neuron register with its popcount decounter.
//
// For 200 random neurons it clears the register, loads a random 12-bit two's-complement
// threshold bit by bit, feeds 116 random XNOR outputs (with random idle cycles between
// them) and checks, after every cycle, the register against T - popcount computed here,
// and at the end the activation against the sign of that difference.
module tb_neuron_unit;
  import bnn_pkg::*;

  localparam int W = 12;
  logic clk = 1'b0, rst_n = 1'b0;
  nu_op_t op;
  logic [$clog2(W)-1:0] ld_bit;
  logic q, act;
  logic signed [W-1:0] value;
  int checks = 0, failures = 0;

  neuron_unit #(.W(W)) dut (.clk, .rst_n, .op, .ld_bit, .q, .act, .value);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input nu_op_t o, input logic [$clog2(W)-1:0] b, input logic qq);
    op = o; ld_bit = b; q = qq;
    @(posedge clk); #1;
  endtask

  initial begin
    int t, pc, expv;
    logic [W-1:0] thr;
    op = NU_HOLD; ld_bit = '0; q = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1;
    for (int n = 0; n < 200; n++) begin
      thr = W'($urandom_range(0, (1 << W) - 1));
      if (n < 20) thr = W'($urandom_range(0, 130));       // realistic thresholds
      step(NU_CLR, '0, 1'b1);
      checks++; if (value !== '0) begin failures++; $display("clear failed"); end
      for (int k = 0; k < W; k++) step(NU_LOAD, ($clog2(W))'(k), thr[k]);
      checks++;
      if (value !== $signed(thr)) begin failures++; $display("load: %0d vs %0d", value, $signed(thr)); end
      pc = 0;
      for (int i = 0; i < 116; i++) begin
        if ($urandom_range(0, 3) == 0) begin
          step(NU_HOLD, '0, 1'b1);     // q toggles but must be ignored
        end
        t = $urandom_range(0, 1);
        step(NU_ACC, '0, t[0]);
        pc += t;
        expv = $signed(thr) - pc;
        checks++;
        if (value !== W'(expv)) begin failures++; $display("acc n=%0d i=%0d: %0d vs %0d", n, i, value, expv); end
      end
      expv = $signed(thr) - pc;
      if (expv < -(1 << (W-1))) expv += (1 << W);
      checks++;
      if (act !== (expv < 0)) begin failures++; $display("act n=%0d: %0b exp %0b", n, act, expv < 0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
