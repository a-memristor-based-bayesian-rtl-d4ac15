// Digital control unit: the only clocked part of the Bayesian machine.
//
// It holds one LFSR per column and drives the core's vertical wires
// (observations and random words) and its programming lines. It runs one
// command at a time (cmd_valid/cmd_ready handshake, accepted when both are
// high on a clock edge) and reports the end of each with a one-cycle done:
//
//   CMD_FORM  (row,col,addr): forms the 2*PROB_W memristors of word addr of
//             block (row,col), one pulse per memristor: left then right
//             memristor of bit 0, then bit 1, and so on.
//   CMD_WRITE (row,col,addr,data): programs that word in complementary
//             fashion: for a 1 the left memristor is SET (LRS) and the right
//             one RESET (HRS), for a 0 the reverse. One pulse per memristor,
//             same order as forming.
//   CMD_READ  latches obs_in, precharges the sense amplifiers for one cycle
//             (SEN low) and raises SEN, which latches every block's
//             likelihood. SEN then stays high until the next programming
//             command, so the core needs no clock while it infers.
//   CMD_INFER (cycles,pc): steps the LFSRs for `cycles` clock cycles with
//             infer_active high; the row outputs of the core are valid on
//             each of these cycles. With pc=1 (power-conscious strategy) it
//             stops after the first cycle on which any row output is 1.
//             cycles=0 ends at once.
// Each programming pulse is one set-up cycle, PULSE_CYCLES cycles with
// prog_pulse high and one hold cycle, with addresses steady throughout, so a
// word takes 2*PROB_W*(PULSE_CYCLES+2) cycles. Seeds are loaded from outside
// at any time with seed_we/seed_col/seed_data. The LFSRs keep their state
// between inferences: after a full 255-cycle inference they are back at
// their seeds.
//
// Follows the paper: LFSRs inside the control unit, seeds loaded from
// external inputs once at power-up, the three operating phases (seed load,
// memory read, inference of up to 255 cycles), memristor-by-memristor
// forming and programming with one pulse each, complementary 2T2R coding,
// the power-conscious early stop. Own choices: the command interface and
// its encoding, PULSE_CYCLES (the paper gives 1 us but no clock frequency),
// the order of pulses, one precharge cycle before sensing.
module digital_control_unit
  import bm_pkg::*;
#(
  parameter int unsigned N_ROWS       = 4,
  parameter int unsigned N_COLS       = 4,
  parameter int unsigned ADDR_W       = 3,
  parameter int unsigned PROB_W       = LIKELIHOOD_BITS,
  parameter int unsigned PULSE_CYCLES = 10,
  localparam int unsigned RW = (N_ROWS > 1) ? $clog2(N_ROWS) : 1,
  localparam int unsigned CW = (N_COLS > 1) ? $clog2(N_COLS) : 1,
  localparam int unsigned BW = $clog2(PROB_W)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // seed loading
  input  logic                           seed_we,
  input  logic [CW-1:0]                  seed_col,
  input  logic [PROB_W-1:0]              seed_data,
  // commands
  input  logic                           cmd_valid,
  output logic                           cmd_ready,
  input  cmd_op_t                        cmd_op,
  input  logic [RW-1:0]                  cmd_row,
  input  logic [CW-1:0]                  cmd_col,
  input  logic [ADDR_W-1:0]              cmd_addr,
  input  logic [PROB_W-1:0]              cmd_data,
  input  logic [PROB_W-1:0]              cmd_cycles,
  input  logic                           cmd_pc,
  output logic                           done,
  // observations from outside, and row outputs of the core
  input  logic [N_COLS-1:0][ADDR_W-1:0]  obs_in,
  input  logic [N_ROWS-1:0]              post,
  // to the core
  output logic                           sen,
  output logic [N_COLS-1:0][ADDR_W-1:0]  obs,
  output logic [N_COLS-1:0][PROB_W-1:0]  rnd,
  output logic [N_ROWS-1:0][N_COLS-1:0]  prog_blk_en,
  output logic [BW-1:0]                  prog_col,
  output logic                           prog_side,
  output prog_op_t                       prog_op,
  output logic                           prog_pulse,
  // inference status
  output logic                           infer_start,
  output logic                           infer_active,
  output logic [PROB_W-1:0]              infer_cycle
);
  typedef enum logic [2:0] {
    S_IDLE, S_SETUP, S_PULSE, S_HOLD, S_PRECHARGE, S_INFER
  } state_t;

  localparam int unsigned PCW = (PULSE_CYCLES > 1) ? $clog2(PULSE_CYCLES) : 1;

  state_t              state;
  cmd_op_t             c_op;
  logic [RW-1:0]       c_row;
  logic [CW-1:0]       c_col;
  logic [ADDR_W-1:0]   c_addr;
  logic [PROB_W-1:0]   c_data;
  logic [PROB_W-1:0]   c_cycles;
  logic                c_pc;
  logic [BW:0]         step;       // memristor index: bit = step>>1, side = step[0]
  logic [PCW-1:0]      pulse_cnt;
  logic [N_COLS-1:0][ADDR_W-1:0] obs_q;
  logic                last_cycle;

  assign cmd_ready = (state == S_IDLE);

  // ---------------------------------------------------------------- LFSRs
  for (genvar n = 0; n < N_COLS; n++) begin : g_lfsr
    lfsr #(.WIDTH(PROB_W)) u_lfsr (
      .clk   (clk),
      .rst_n (rst_n),
      .load  (seed_we && seed_col == CW'(n)),
      .seed  (seed_data),
      .en    (state == S_INFER),
      .q     (rnd[n])
    );
  end

  // ---------------------------------------------------------------- sequencing
  assign last_cycle = (infer_cycle == c_cycles - 1'b1) || (c_pc && |post);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      c_op        <= CMD_READ;
      c_row       <= '0;
      c_col       <= '0;
      c_addr      <= '0;
      c_data      <= '0;
      c_cycles    <= '0;
      c_pc        <= 1'b0;
      step        <= '0;
      pulse_cnt   <= '0;
      obs_q       <= '0;
      sen         <= 1'b0;
      done        <= 1'b0;
      infer_cycle <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid) begin
          c_op     <= cmd_op;
          c_row    <= cmd_row;
          c_col    <= cmd_col;
          c_addr   <= cmd_addr;
          c_data   <= cmd_data;
          c_cycles <= cmd_cycles;
          c_pc     <= cmd_pc;
          step     <= '0;
          unique case (cmd_op)
            CMD_FORM, CMD_WRITE: begin
              sen   <= 1'b0;
              state <= S_SETUP;
            end
            CMD_READ: begin
              obs_q <= obs_in;
              sen   <= 1'b0;
              state <= S_PRECHARGE;
            end
            CMD_INFER: begin
              infer_cycle <= '0;
              if (cmd_cycles == '0) done <= 1'b1;
              else                  state <= S_INFER;
            end
          endcase
        end
        S_SETUP: begin
          pulse_cnt <= '0;
          state     <= S_PULSE;
        end
        S_PULSE: begin
          pulse_cnt <= pulse_cnt + 1'b1;
          if (pulse_cnt == PCW'(PULSE_CYCLES - 1)) state <= S_HOLD;
        end
        S_HOLD: begin
          if (step == (BW+1)'(2 * PROB_W - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            step  <= step + 1'b1;
            state <= S_SETUP;
          end
        end
        S_PRECHARGE: begin
          sen   <= 1'b1;
          state <= S_IDLE;
          done  <= 1'b1;
        end
        S_INFER: begin
          infer_cycle <= infer_cycle + 1'b1;
          if (last_cycle) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- outputs
  logic prog_phase;
  logic bit_val;
  assign prog_phase = (state == S_SETUP) || (state == S_PULSE) || (state == S_HOLD);
  assign prog_col   = step[BW:1];
  assign prog_side  = step[0];
  assign prog_pulse = (state == S_PULSE);
  assign bit_val    = c_data[prog_col];

  always_comb begin
    if (c_op == CMD_FORM)            prog_op = OP_FORM;
    else if (bit_val ^ prog_side)    prog_op = OP_SET;    // 1: left SET; 0: right SET
    else                             prog_op = OP_RESET;
  end

  always_comb begin
    prog_blk_en = '0;
    if (prog_phase) prog_blk_en[c_row][c_col] = 1'b1;
  end

  always_comb begin
    for (int n = 0; n < N_COLS; n++) obs[n] = prog_phase ? c_addr : obs_q[n];
  end

  assign infer_start  = (state == S_IDLE) && cmd_valid && (cmd_op == CMD_INFER);
  assign infer_active = (state == S_INFER);

  a_pulse_addr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    prog_pulse |=> !prog_pulse || $stable(prog_col) && $stable(prog_side) && $stable(prog_blk_en))
    else $error("digital_control_unit: programming address changed during a pulse");
  a_sen_low_when_prog: assert property (@(posedge clk) disable iff (!rst_n)
    prog_pulse |-> !sen)
    else $error("digital_control_unit: sensing while programming");
endmodule
