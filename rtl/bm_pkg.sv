// Shared types and constants of the memristor-based Bayesian machine.
//
// LIKELIHOOD_BITS is the width of a stored likelihood: eight-bit integers, as on the
// fabricated chip and the scaled-up gesture machine. mem_state_t is the state
// of one memristor as the behavioural array model sees it; prog_op_t is the
// programming operation the control unit applies with one pulse (the supply
// levels VDDR/VDDC that distinguish forming, SET and RESET are set off chip).
// cmd_op_t lists the commands the control unit accepts.
package bm_pkg;
  localparam int unsigned LIKELIHOOD_BITS = 8;

  // One memristor: never formed, low-resistance or high-resistance state.
  typedef enum logic [1:0] {
    MEM_UNFORMED = 2'd0,
    MEM_HRS      = 2'd1,
    MEM_LRS      = 2'd2
  } mem_state_t;

  // Operation applied by one programming pulse.
  typedef enum logic [1:0] {
    OP_FORM  = 2'd0,
    OP_SET   = 2'd1,
    OP_RESET = 2'd2
  } prog_op_t;

  // Commands of the digital control unit.
  typedef enum logic [1:0] {
    CMD_FORM  = 2'd0,   // form the 16 memristors of one 8-bit word
    CMD_WRITE = 2'd1,   // program one word, complementary 2T2R coding
    CMD_READ  = 2'd2,   // latch observations and sense all arrays
    CMD_INFER = 2'd3    // run the stochastic inference for N cycles
  } cmd_op_t;
endpackage
