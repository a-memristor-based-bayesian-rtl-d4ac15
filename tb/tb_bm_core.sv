// Testbench of bm_core at the fabricated size (4 rows x 4 columns, 8 words
// of 8 bits). Programs every block through the core's programming lines,
// then for many random observation sets senses the arrays and drives the
// column random words from testbench LFSRs. On every step each row output
// must equal prior AND the reference Gupta bits of its four likelihoods, and
// over a full 255-step period the row counts must match the testbench's own
// count. Checks the likelihoods seen by each block too.
module tb_bm_core;
  import bm_pkg::*;
  localparam int NR = 4, NC = 4, AW = 3;
  logic sen = 1'b0;
  logic [NC-1:0][AW-1:0] obs = '0;
  logic [NC-1:0][7:0] rnd = '0;
  logic [NR-1:0][NC-1:0] prog_blk_en = '0;
  logic [2:0] prog_col = '0;
  logic prog_side = 1'b0;
  prog_op_t prog_op = OP_FORM;
  logic prog_pulse = 1'b0;
  logic [NR-1:0] prior = '1;
  logic [NR-1:0] post;
  logic [NR-1:0][NC-1:0][7:0] proba;
  logic [7:0] lk [NR][NC][2**AW];
  int checks = 0, failures = 0;

  bm_core #(.N_ROWS(NR), .N_COLS(NC), .ADDR_W(AW), .PROB_W(8)) dut (.*);

  function automatic logic [7:0] ref_next(logic [7:0] s);
    return {s[6:0], s[7] ^ s[5] ^ s[4] ^ s[3]};
  endfunction
  function automatic logic ref_psb(logic [7:0] p, logic [7:0] r);
    for (int k = 7; k >= 0; k--) if (r[k]) return p[k];
    return 1'b0;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic pulse(int y, int n, int a, int b, bit side, prog_op_t op);
    sen = 1'b0;
    prog_blk_en = '0; prog_blk_en[y][n] = 1'b1;
    obs = '0; obs[n] = AW'(a);
    prog_col = 3'(b); prog_side = side; prog_op = op;
    #1 prog_pulse = 1'b1;
    #1 prog_pulse = 1'b0;
    #1 prog_blk_en = '0;
  endtask

  initial begin : watchdog
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] r [NC];
    int ones [NR], exp_ones [NR];
    logic e;
    for (int y = 0; y < NR; y++)
      for (int n = 0; n < NC; n++)
        for (int a = 0; a < 2**AW; a++) begin
          lk[y][n][a] = 8'($urandom);
          if (a == 0) lk[y][n][a] = 8'hFF;
          for (int b = 0; b < 8; b++) begin
            pulse(y, n, a, b, 0, OP_FORM);
            pulse(y, n, a, b, 1, OP_FORM);
            pulse(y, n, a, b, 0, lk[y][n][a][b] ? OP_SET : OP_RESET);
            pulse(y, n, a, b, 1, lk[y][n][a][b] ? OP_RESET : OP_SET);
          end
        end
    for (int t = 0; t < 12; t++) begin
      sen = 1'b0;
      for (int n = 0; n < NC; n++) obs[n] = AW'($urandom);
      if (t == 0) obs = '0;
      prior = (t < 6) ? '1 : NR'($urandom);
      #1 sen = 1'b1;
      #1;
      for (int y = 0; y < NR; y++)
        for (int n = 0; n < NC; n++)
          check(proba[y][n] == lk[y][n][obs[n]], $sformatf("likelihood y%0d n%0d", y, n));
      for (int n = 0; n < NC; n++) r[n] = 8'($urandom_range(1, 255));
      foreach (ones[y]) begin ones[y] = 0; exp_ones[y] = 0; end
      for (int k = 0; k < 255; k++) begin
        for (int n = 0; n < NC; n++) rnd[n] = r[n];
        #1;
        for (int y = 0; y < NR; y++) begin
          e = prior[y];
          for (int n = 0; n < NC; n++) e &= ref_psb(lk[y][n][obs[n]], r[n]);
          exp_ones[y] += e;
          ones[y] += post[y];
          check(post[y] == e, $sformatf("t%0d step %0d row %0d", t, k, y));
        end
        for (int n = 0; n < NC; n++) r[n] = ref_next(r[n]);
      end
      for (int y = 0; y < NR; y++)
        check(ones[y] == exp_ones[y], $sformatf("t%0d row %0d count %0d vs %0d", t, y, ones[y], exp_ones[y]));
      if (t == 0) check(ones[0] == 255 && ones[3] == 255, "all-FF likelihoods give all ones");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
