// Decision unit: turns the row bit streams into a recognised class.
//
// It supports the two read-out strategies used for the gesture task:
//  - conventional stochastic computing: count the ones of every row output
//    over the inference and choose the row with the most ones (best_row;
//    the lowest index wins a tie);
//  - power-conscious: the first row that outputs a one is the answer
//    (first_row, valid once first_valid is high; the lowest index wins if
//    several rows output their first one on the same cycle). The control
//    unit stops the inference on that cycle when asked to.
// start (one cycle, before the first active cycle) clears the counters and
// the first-one flag; on every clock edge with active high, post is
// sampled. count[y]/cycles estimates the normalised posterior of Y=y, the
// quantity measured on the fabricated chip. Counters saturate at 2^CNT_W-1.
//
// Follows the paper: the two strategies and counting ones per row output.
// Own choice: doing it on chip; the paper counted the test chip's outputs
// off chip and does not say where the gesture machine makes its decision.
module decision_unit #(
  parameter int unsigned N_ROWS = 4,
  parameter int unsigned CNT_W  = 8,
  localparam int unsigned RW = (N_ROWS > 1) ? $clog2(N_ROWS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          active,
  input  logic [N_ROWS-1:0]             post,
  output logic [N_ROWS-1:0][CNT_W-1:0]  count,
  output logic [RW-1:0]                 best_row,
  output logic [RW-1:0]                 first_row,
  output logic                          first_valid
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count       <= '0;
      first_row   <= '0;
      first_valid <= 1'b0;
    end else if (start) begin
      count       <= '0;
      first_row   <= '0;
      first_valid <= 1'b0;
    end else if (active) begin
      for (int y = 0; y < N_ROWS; y++)
        if (post[y] && count[y] != '1) count[y] <= count[y] + 1'b1;
      if (!first_valid && |post) begin
        first_valid <= 1'b1;
        for (int y = N_ROWS - 1; y >= 0; y--)
          if (post[y]) first_row <= RW'(y);
      end
    end
  end

  always_comb begin
    best_row = '0;
    for (int y = 1; y < N_ROWS; y++)
      if (count[y] > count[best_row]) best_row = RW'(y);
  end
endmodule
