// Memristor-based Bayesian machine, top level.
//
// Computes, by stochastic computing, the posterior p(Y=y | O_1..O_n) of a
// naive-Bayes model whose likelihoods p(O_n | Y=y) sit in non-volatile
// memristor arrays next to the logic that uses them. The digital control
// unit (clocked; holds the column LFSRs) drives a grid of N_ROWS x N_COLS
// likelihood blocks (bm_core, not clocked); each row ANDs together the
// stochastic bits of its likelihoods and emits post[y], a bit stream whose
// density is proportional to the posterior of Y=y. The decision unit counts
// these bits and names the winning row. Defaults are those of the
// fabricated demonstrator: 4 rows, 4 columns, 8 x 8-bit likelihood words per
// array (3-bit observations), 255-cycle inference. The scaled-up gesture
// machine is N_COLS=6, ADDR_W=9.
//
// Use: after reset, load one seed per column (seed_we), form and program
// every word (CMD_FORM then CMD_WRITE, see digital_control_unit), then for
// each new set of observations issue CMD_READ followed by CMD_INFER. During
// inference infer_active marks the cycles on which post is valid; done
// pulses at the end of each command, after which count/best_row (most ones)
// and first_row/first_valid (first one) hold the result until the next
// CMD_INFER. prior[y] is the bit stream entering row y: tie it high for the
// uniform prior used by both machines the paper built; a prior generator
// could drive it.
module bayesian_machine
  import bm_pkg::*;
#(
  parameter int unsigned N_ROWS       = 4,
  parameter int unsigned N_COLS       = 4,
  parameter int unsigned ADDR_W       = 3,
  parameter int unsigned PROB_W       = LIKELIHOOD_BITS,
  parameter int unsigned PULSE_CYCLES = 10,
  localparam int unsigned RW = (N_ROWS > 1) ? $clog2(N_ROWS) : 1,
  localparam int unsigned CW = (N_COLS > 1) ? $clog2(N_COLS) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 seed_we,
  input  logic [CW-1:0]                        seed_col,
  input  logic [PROB_W-1:0]                    seed_data,
  input  logic                                 cmd_valid,
  output logic                                 cmd_ready,
  input  cmd_op_t                              cmd_op,
  input  logic [RW-1:0]                        cmd_row,
  input  logic [CW-1:0]                        cmd_col,
  input  logic [ADDR_W-1:0]                    cmd_addr,
  input  logic [PROB_W-1:0]                    cmd_data,
  input  logic [PROB_W-1:0]                    cmd_cycles,
  input  logic                                 cmd_pc,
  output logic                                 done,
  input  logic [N_COLS-1:0][ADDR_W-1:0]        obs_in,
  input  logic [N_ROWS-1:0]                    prior,
  output logic [N_ROWS-1:0]                    post,
  output logic                                 infer_active,
  output logic [PROB_W-1:0]                    infer_cycle,
  output logic [N_ROWS-1:0][PROB_W-1:0]        count,
  output logic [RW-1:0]                        best_row,
  output logic [RW-1:0]                        first_row,
  output logic                                 first_valid,
  output logic [N_ROWS-1:0][N_COLS-1:0][PROB_W-1:0] proba
);
  localparam int unsigned BW = $clog2(PROB_W);

  logic                           sen;
  logic [N_COLS-1:0][ADDR_W-1:0]  obs;
  logic [N_COLS-1:0][PROB_W-1:0]  rnd;
  logic [N_ROWS-1:0][N_COLS-1:0]  prog_blk_en;
  logic [BW-1:0]                  prog_col;
  logic                           prog_side;
  prog_op_t                       prog_op;
  logic                           prog_pulse;
  logic                           infer_start;

  digital_control_unit #(
    .N_ROWS(N_ROWS), .N_COLS(N_COLS), .ADDR_W(ADDR_W), .PROB_W(PROB_W),
    .PULSE_CYCLES(PULSE_CYCLES)
  ) u_dcu (
    .clk, .rst_n,
    .seed_we, .seed_col, .seed_data,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_row, .cmd_col, .cmd_addr,
    .cmd_data, .cmd_cycles, .cmd_pc, .done,
    .obs_in, .post,
    .sen, .obs, .rnd, .prog_blk_en, .prog_col, .prog_side, .prog_op, .prog_pulse,
    .infer_start, .infer_active, .infer_cycle
  );

  bm_core #(
    .N_ROWS(N_ROWS), .N_COLS(N_COLS), .ADDR_W(ADDR_W), .PROB_W(PROB_W)
  ) u_core (
    .sen, .obs, .rnd, .prog_blk_en, .prog_col, .prog_side, .prog_op, .prog_pulse,
    .prior, .post, .proba
  );

  decision_unit #(.N_ROWS(N_ROWS), .CNT_W(PROB_W)) u_dec (
    .clk, .rst_n,
    .start  (infer_start),
    .active (infer_active),
    .post,
    .count, .best_row, .first_row, .first_valid
  );
endmodule
