// Column random-number generator: an 8-bit Fibonacci LFSR.
//
// One LFSR per column of the Bayesian machine feeds the same pseudorandom
// word RND to every likelihood block of that column (rows compute
// independently, so they can share it). With the default taps
// x^8+x^6+x^5+x^4+1 the register walks through all 255 non-zero values, so
// its period is 255 cycles, which is the period the machine is operated for.
// The seed is loaded from outside (load), which sets q to seed on the next
// clock edge; en advances the register by one step per clock. Reset sets
// q to 1. A zero seed would lock the register at zero; an assertion flags it.
//
// Follows the paper: one 8-bit LFSR per column, period 255, seeds loaded from
// external inputs. Own choices: the feedback polynomial, Fibonacci form,
// shift direction and reset value, none of which the paper gives.
module lfsr #(
  parameter int unsigned     WIDTH = 8,
  parameter logic [WIDTH-1:0] TAPS = 8'hB8   // x^8+x^6+x^5+x^4+1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [WIDTH-1:0] seed,
  input  logic             en,
  output logic [WIDTH-1:0] q
);
  logic fb;
  assign fb = ^(q & TAPS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     q <= WIDTH'(1);
    else if (load)  q <= seed;
    else if (en)    q <= {q[WIDTH-2:0], fb};
  end

  a_nonzero_seed: assert property (@(posedge clk) disable iff (!rst_n) load |-> seed != '0)
    else $error("lfsr: zero seed loaded");
endmodule
