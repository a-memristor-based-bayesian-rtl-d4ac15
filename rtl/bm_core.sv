// Core of the Bayesian machine: a grid of likelihood blocks.
//
// Row y (0..N_ROWS-1) computes the posterior of Y=y; column n (0..N_COLS-1)
// handles observation O_n. Vertical wires carry each column's observation
// obs[n] and random word rnd[n] to all blocks of that column; horizontal
// wires carry the single-bit stream from block to block along a row. Row y
// starts with prior[y] (tie high for a uniform prior, which is the case of
// both machines built) and ends in post[y], a bit stream whose density is
// proportional to p(Y=y | O_1..O_n):
//   P(post[y]=1) = prior * prod_n p(O_n=obs[n] | Y=y)
// with the products formed by AND gates and uncorrelated columns. The core
// has no clock: post follows rnd combinationally once SEN has latched the
// likelihoods.
//
// Programming: prog_blk_en[y][n] picks the block; all blocks share prog_col,
// prog_side, prog_op and prog_pulse, and the block's row address travels on
// the column's observation wires.
//
// Follows the paper: grid organisation, column-shared LFSR words and
// observations, bit streams passed between neighbouring blocks, 4 x 4 on the
// fabricated chip (6 columns x 4 rows in the gesture machine). Own choice:
// the programming selection lines.
module bm_core
  import bm_pkg::*;
#(
  parameter int unsigned N_ROWS = 4,
  parameter int unsigned N_COLS = 4,
  parameter int unsigned ADDR_W = 3,
  parameter int unsigned PROB_W = LIKELIHOOD_BITS
) (
  input  logic                                 sen,
  input  logic [N_COLS-1:0][ADDR_W-1:0]        obs,
  input  logic [N_COLS-1:0][PROB_W-1:0]        rnd,
  input  logic [N_ROWS-1:0][N_COLS-1:0]        prog_blk_en,
  input  logic [$clog2(PROB_W)-1:0]            prog_col,
  input  logic                                 prog_side,
  input  prog_op_t                             prog_op,
  input  logic                                 prog_pulse,
  input  logic [N_ROWS-1:0]                    prior,
  output logic [N_ROWS-1:0]                    post,
  output logic [N_ROWS-1:0][N_COLS-1:0][PROB_W-1:0] proba
);
  // chain[y][n] enters block (y,n); chain[y][N_COLS] leaves the row.
  logic [N_COLS:0] chain [N_ROWS];

  for (genvar y = 0; y < N_ROWS; y++) begin : g_row
    assign chain[y][0] = prior[y];
    for (genvar n = 0; n < N_COLS; n++) begin : g_col
      likelihood_block #(.ADDR_W(ADDR_W), .PROB_W(PROB_W)) u_blk (
        .sen        (sen),
        .obs        (obs[n]),
        .rnd        (rnd[n]),
        .prog_en    (prog_blk_en[y][n]),
        .prog_col   (prog_col),
        .prog_side  (prog_side),
        .prog_op    (prog_op),
        .prog_pulse (prog_pulse),
        .chain_in   (chain[y][n]),
        .chain_out  (chain[y][n+1]),
        .proba      (proba[y][n])
      );
    end
    assign post[y] = chain[y][N_COLS];
  end
endmodule
