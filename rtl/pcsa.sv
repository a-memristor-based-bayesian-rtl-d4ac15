// Behavioural model (not synthesizable logic) of the precharge sense
// amplifier (PCSA) that reads one 2T2R bit cell differentially.
//
// While SEN is low both outputs are precharged high. When SEN rises, the
// branch whose memristor conducts better discharges first and the
// cross-coupled pair latches: OUT=1 if the BL memristor is in the lower
// resistance state (bit 1: left LRS, right HRS), OUT=0 if the BLb memristor
// is. OUTb is the complement. The decision is held until SEN falls, so the
// read probability stays valid through the whole inference without a clock.
// When both memristors are in the same state (for instance both unformed,
// as before forming) the amplifier resolves at random, which is why an
// unprogrammed array reads as noise.
//
// The coin is a 16-bit LFSR (x^16+x^14+x^13+x^11+1) stepped at each
// sensing, started from NOISE_SEED (or from power-up state if non-zero).
//
// Follows the paper: differential precharge sensing of two memristors, SEN,
// OUT/OUTb, random reads before forming. Own choices: resistance ordering
// LRS < HRS < unformed, and the pseudo-random resolution of equal states.
module pcsa
  import bm_pkg::*;
#(
  parameter logic [15:0] NOISE_SEED = 16'hACE1
) (
  input  logic       sen,
  input  mem_state_t st_bl,
  input  mem_state_t st_blb,
  output logic       out,
  output logic       out_b
);
  logic        dec;
  logic [15:0] noise;
  logic [15:0] noise_next;

  assign noise_next = (noise == '0) ? NOISE_SEED
                                    : {noise[14:0], noise[15] ^ noise[13] ^ noise[12] ^ noise[10]};

  function automatic int conductance(mem_state_t s);
    case (s)
      MEM_LRS: return 2;
      MEM_HRS: return 1;
      default: return 0;
    endcase
  endfunction


  always @(posedge sen) begin
    noise <= noise_next;
    if (conductance(st_bl) > conductance(st_blb))      dec <= 1'b1;
    else if (conductance(st_bl) < conductance(st_blb)) dec <= 1'b0;
    else                                                dec <= noise_next[0];
  end

  assign out   = sen ? dec  : 1'b1;
  assign out_b = sen ? ~dec : 1'b1;
endmodule
