// indicator: indication element (IE), the coincidence detector of one etalon.
//
// It evaluates the conjunction S = alpha_1 & alpha_2 & ... & alpha_n of the
// match signals of a chain, one per step, with a single trigger T:
//   * c (time tau_0) sets T to 1;
//   * at each step the strobe b resets T if the match signal l is absent
//     (the AND gate with the inverted l input of the functional scheme);
//   * d (after the last symbol) reads the result: s = T & d.
// So s is 1 only if every strobed step saw l = 1. The gates and the trigger
// follow the paper's functional scheme; making T a clocked flip-flop (c, b,
// l sampled on the rising clock edge, c taking priority over a reset) and
// resetting it to 0 are this design's choices.
//
// Interface: clk, rst_n (asynchronous, active low), c, b, l, d -> s, t.
// Timing: t changes one clock after c or b & ~l; s is combinational in t and d.
module indicator (
  input  logic clk,
  input  logic rst_n,
  input  logic c,
  input  logic b,
  input  logic l,
  input  logic d,
  output logic s,
  output logic t
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        t <= 1'b0;
    else if (c)        t <= 1'b1;
    else if (b && !l)  t <= 1'b0;
  end

  assign s = t & d;

endmodule
