// Behavioural model (not synthesizable logic) of a 2T2R HfOx memristor array.
//
// Each bit cell holds two memristors, the left one on bit line BL and the
// right one on BLb, each behind an n-type select transistor gated by the row's
// word line WL; both share the column's source line SL. A memristor is
// UNFORMED until a forming pulse creates its filament (it then sits in LRS);
// afterwards SET pulses put it in LRS and RESET pulses (opposite polarity)
// in HRS. SET or RESET on an unformed device leaves it unformed.
//
// Programming: on each rising edge of prog_pulse, every memristor whose WL,
// SL and own bit line (BL for the left, BLb for the right) are all selected
// takes the operation prog_op. In silicon the operation is set by the supply
// levels (forming: VDDC=VDDR=3.0 V; SET: VDDC=3.5 V, VDDR=3.0 V; RESET:
// VDDC=4.5 V, VDDR=4.9 V, reversed polarity) and the pulse lasts 1 us; the
// model takes the operation as an input and ignores pulse width and voltage.
//
// Reading: st_bl/st_blb give, per bit column, the states of the two
// memristors of the row whose word line is on (lowest index wins if several
// are; UNFORMED if none), for the sense amplifiers to compare.
// All memristors start UNFORMED, as after fabrication.
//
// Follows the paper: 2T2R cells, forming/SET/RESET, 8 x 8 cells (64 bit
// cells) on the fabricated chip. Own choices: forming leaves LRS; no device
// variability, no disturb, no retention loss.
module memristor_array
  import bm_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 8
) (
  input  logic [ROWS-1:0] wl,
  input  logic [COLS-1:0] bl,
  input  logic [COLS-1:0] blb,
  input  logic [COLS-1:0] sl,
  input  prog_op_t        prog_op,
  input  logic            prog_pulse,
  output mem_state_t      st_bl  [COLS],
  output mem_state_t      st_blb [COLS]
);
  mem_state_t cell_l [ROWS][COLS];
  mem_state_t cell_r [ROWS][COLS];

  function automatic mem_state_t apply_op(mem_state_t s, prog_op_t op);
    case (op)
      OP_FORM:  return MEM_LRS;
      OP_SET:   return (s == MEM_UNFORMED) ? MEM_UNFORMED : MEM_LRS;
      OP_RESET: return (s == MEM_UNFORMED) ? MEM_UNFORMED : MEM_HRS;
      default:  return s;
    endcase
  endfunction

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        cell_l[r][c] = MEM_UNFORMED;
        cell_r[r][c] = MEM_UNFORMED;
      end
  end

  always @(posedge prog_pulse) begin
    if (|sl)
      for (int r = 0; r < ROWS; r++)
        if (wl[r])
          for (int c = 0; c < COLS; c++)
            if (sl[c]) begin
              if (bl[c])  cell_l[r][c] <= apply_op(cell_l[r][c], prog_op);
              if (blb[c]) cell_r[r][c] <= apply_op(cell_r[r][c], prog_op);
            end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      st_bl[c]  = MEM_UNFORMED;
      st_blb[c] = MEM_UNFORMED;
    end
    for (int r = ROWS - 1; r >= 0; r--)
      if (wl[r])
        for (int c = 0; c < COLS; c++) begin
          st_bl[c]  = cell_l[r][c];
          st_blb[c] = cell_r[r][c];
        end
  end
endmodule
