// One likelihood block: a likelihood memory array with its periphery, a
// Gupta circuit and the stochastic multiplier (an AND gate).
//
// The block stores p(O=o | Y=y) for one observation O (its column of the
// machine) and one value y (its row), for each of the 2^ADDR_W values o, as
// PROB_W-bit integers in a 2T2R memristor array of 2^ADDR_W rows by PROB_W
// bit columns. The observation obs drives the row decoder; when SEN rises
// the PROB_W sense amplifiers latch the word o, giving proba. The Gupta
// circuit turns proba and the column random word rnd into a bit that is 1
// with probability proba/2^PROB_W, and the AND gate multiplies it with the
// bit stream chain_in arriving from the previous column, giving chain_out
// for the next column. Nothing here is clocked: chain_out follows rnd and
// chain_in combinationally, and proba is held by the sense amplifiers for as
// long as SEN stays high.
//
// Programming (prog_en high, SEN low): obs is the row address, prog_col the
// bit column and prog_side the memristor (0: left on BL, 1: right on BLb);
// each rising edge of prog_pulse applies prog_op to that one memristor.
//
// Follows the paper (block schematic of the fabricated chip): WL_adr row
// decoder, column decoder with BL/BLb/SL addresses, 2T2R array, one PCSA per
// bit column, Gupta circuit fed by RND[0:7], AND gate between "from previous
// column" and "to next column". Own choices: the programming port, and that
// the row decoder is enabled only while sensing or programming. The level
// shifters are analog and not modelled; their effect is part of the array
// model.
module likelihood_block
  import bm_pkg::*;
#(
  parameter int unsigned ADDR_W = 3,
  parameter int unsigned PROB_W = LIKELIHOOD_BITS
) (
  input  logic                      sen,
  input  logic [ADDR_W-1:0]         obs,
  input  logic [PROB_W-1:0]         rnd,
  input  logic                      prog_en,
  input  logic [$clog2(PROB_W)-1:0] prog_col,
  input  logic                      prog_side,
  input  prog_op_t                  prog_op,
  input  logic                      prog_pulse,
  input  logic                      chain_in,
  output logic                      chain_out,
  output logic [PROB_W-1:0]         proba
);
  localparam int unsigned ROWS = 2 ** ADDR_W;

  logic [ROWS-1:0]   wl;
  logic [PROB_W-1:0] bl, blb, sl;
  mem_state_t        st_bl  [PROB_W];
  mem_state_t        st_blb [PROB_W];
  logic [PROB_W-1:0] out_b;   // complementary PCSA outputs, not needed by the Gupta circuit
  logic              psb;

  row_decoder #(.ADDR_W(ADDR_W)) u_row_dec (
    .en  (sen | prog_en),
    .adr (obs),
    .wl  (wl)
  );

  column_decoder #(.COL_ADDR_W($clog2(PROB_W))) u_col_dec (
    .bl_en   (prog_en & ~prog_side),
    .blb_en  (prog_en & prog_side),
    .sl_en   (prog_en),
    .bl_adr  (prog_col),
    .blb_adr (prog_col),
    .sl_adr  (prog_col),
    .bl      (bl),
    .blb     (blb),
    .sl      (sl)
  );

  memristor_array #(.ROWS(ROWS), .COLS(PROB_W)) u_array (
    .wl         (wl),
    .bl         (bl),
    .blb        (blb),
    .sl         (sl),
    .prog_op    (prog_op),
    .prog_pulse (prog_pulse),
    .st_bl      (st_bl),
    .st_blb     (st_blb)
  );

  for (genvar b = 0; b < PROB_W; b++) begin : g_pcsa
    pcsa #(.NOISE_SEED(16'hACE1 ^ 16'(b * 16'h1F3))) u_pcsa (
      .sen    (sen),
      .st_bl  (st_bl[b]),
      .st_blb (st_blb[b]),
      .out    (proba[b]),
      .out_b  (out_b[b])
    );
  end

  gupta #(.W(PROB_W)) u_gupta (
    .proba (proba),
    .rnd   (rnd),
    .psb   (psb)
  );

  // Stochastic multiplier.
  assign chain_out = chain_in & psb;
endmodule
