// xpcsa: behavioural model of the XNOR-augmented precharge differential sense amplifier.
//
// Behavioural model (not synthesizable logic of the real part): the real circuit is a
// full-custom analog latch.  While the sense enable se is low both outputs are
// precharged high.  When se rises the two branches discharge through the two
// complementary memristors of a bit cell, BL side and BLb side; the branch with the
// lower resistance wins and the cross-coupled latch settles.  Four thick-oxide
// transistors driven by the input activation x swap the two branches, so the latched
// output is XNOR(x, w) with w = 1 when the BL memristor is the low-resistance one.
// Only the order of the two resistances matters, not their values: this is what makes
// the read insensitive to device variability and to the supply level.  Two equal
// resistances (an unprogrammed or badly programmed cell) resolve to w = 0 here; in
// silicon that case is random.
//
// Interface: se, x and the two resistances (kilo-ohms) in, q / qb out; combinational
// in this model, q = qb = 1 during precharge.
//
// The XNOR-in-sense-amplifier principle is the paper's; the tie rule and the kilo-ohm
// resistance encoding are this model's choices.
module xpcsa (
  input  logic        se,      // sense enable: 0 = precharge, 1 = evaluate
  input  logic        x,       // input activation (1 = +1)
  input  logic [15:0] r_bl,    // resistance of the BL memristor, kOhm
  input  logic [15:0] r_blb,   // resistance of the BLb memristor, kOhm
  output logic        q,       // XNOR(x, w)
  output logic        qb       // complement
);

  logic w;

  always_comb begin
    w = (r_bl < r_blb);
    if (!se) begin
      q  = 1'b1;
      qb = 1'b1;
    end else begin
      q  = ~(x ^ w);
      qb = x ^ w;
    end
  end

endmodule
