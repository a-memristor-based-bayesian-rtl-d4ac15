// Digital row decoder of a likelihood memory array.
//
// Turns the word-line address WL_adr into one-hot word lines. During
// inference the address is the column's observation, so the observation
// selects which stored likelihood is read; during programming it selects the
// row of the memristor being formed or written. en low keeps all word lines
// off. Combinational. The paper names the block; its insides are the
// obvious binary-to-one-hot decoder.
module row_decoder #(
  parameter int unsigned ADDR_W = 3
) (
  input  logic                 en,
  input  logic [ADDR_W-1:0]    adr,
  output logic [2**ADDR_W-1:0] wl
);
  always_comb begin
    wl = '0;
    if (en) wl[adr] = 1'b1;
  end
endmodule
