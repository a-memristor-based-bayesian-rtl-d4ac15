// Digital column decoder of a likelihood memory array.
//
// The array has one bit line BL, one complementary bit line BLb and one
// source line SL per bit column. For programming, the control logic names
// the column of each line by its own address (BL_adr, BLb_adr, SL_adr) and
// enables the lines it wants driven; the decoder returns one-hot selects
// that the level shifters would raise to the programming voltage. A SET or
// forming pulse on the left memristor of column c drives BL[c] and SL[c];
// the right memristor uses BLb[c] and SL[c]. Combinational. The paper names
// the block and its three address inputs; its insides are this design's.
module column_decoder #(
  parameter int unsigned COL_ADDR_W = 3
) (
  input  logic                     bl_en,
  input  logic                     blb_en,
  input  logic                     sl_en,
  input  logic [COL_ADDR_W-1:0]    bl_adr,
  input  logic [COL_ADDR_W-1:0]    blb_adr,
  input  logic [COL_ADDR_W-1:0]    sl_adr,
  output logic [2**COL_ADDR_W-1:0] bl,
  output logic [2**COL_ADDR_W-1:0] blb,
  output logic [2**COL_ADDR_W-1:0] sl
);
  always_comb begin
    bl  = '0;
    blb = '0;
    sl  = '0;
    if (bl_en)  bl[bl_adr]   = 1'b1;
    if (blb_en) blb[blb_adr] = 1'b1;
    if (sl_en)  sl[sl_adr]   = 1'b1;
  end
endmodule
