// "Gupta" binary-to-stochastic converter.
//
// Produces the proportional stochastic bit PSB from a stored probability
// proba and the column random word rnd, purely combinationally (no clock).
// The circuit follows Gupta and Kumaresan's weighted binary generator: random
// bit i "selects" probability bit i when it is the highest set random bit,
// i.e. rnd[i]=1 and every rnd[j], j>i, is 0. PSB is the OR of the selected
// probability bits. A random word whose highest set bit is i occurs with
// probability 2^i/2^W, so P(PSB=1) = proba/2^W for uniform rnd, and when rnd
// runs through all 2^W-1 non-zero values of a full LFSR period, PSB is 1 on
// exactly proba of those cycles: the value FF gives a stream of ones.
//
// Follows the paper: the circuit is Gupta's, taken as 8 bits wide, comparing
// the probability read from memory with the LFSR word. Own choice: bit i of
// rnd pairs with bit i of proba (the figure shows the 4-bit circuit but not
// this pairing).
module gupta #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] proba,
  input  logic [W-1:0] rnd,
  output logic         psb
);
  logic [W-1:0] hi_clear;  // hi_clear[i]: all rnd bits above i are zero
  logic [W-1:0] sel;       // one-hot (or zero) weighted random bits

  always_comb begin
    hi_clear[W-1] = 1'b1;
    for (int i = W - 2; i >= 0; i--) hi_clear[i] = hi_clear[i+1] & ~rnd[i+1];
    sel = rnd & hi_clear;
  end

  assign psb = |(sel & proba);
endmodule
