// Testbench of likelihood_block (fabricated size: 8 words of 8 bits).
// Forms every memristor, programs random words in complementary fashion
// through the block's own programming port, reads each word back through
// the sense amplifiers, then checks the stochastic output: with chain_in
// held at 1 for a full 255-step LFSR period the block must output exactly
// `proba` ones, and with a random chain_in the output must be chain_in AND
// the reference Gupta bit on every step. Also reprograms words (1->0 and
// 0->1 transitions) and checks they read back.
module tb_likelihood_block;
  import bm_pkg::*;
  logic sen = 1'b0;
  logic [2:0] obs = '0;
  logic [7:0] rnd = 8'h01;
  logic prog_en = 1'b0;
  logic [2:0] prog_col = '0;
  logic prog_side = 1'b0;
  prog_op_t prog_op = OP_FORM;
  logic prog_pulse = 1'b0;
  logic chain_in = 1'b0, chain_out;
  logic [7:0] proba;
  logic [7:0] words [8];
  int checks = 0, failures = 0;

  likelihood_block #(.ADDR_W(3), .PROB_W(8)) dut (.*);

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

  task automatic pulse(int a, int b, bit side, prog_op_t op);
    sen = 1'b0; prog_en = 1'b1; obs = 3'(a); prog_col = 3'(b); prog_side = side; prog_op = op;
    #1 prog_pulse = 1'b1;
    #1 prog_pulse = 1'b0;
    #1 prog_en = 1'b0;
  endtask

  task automatic write_word(int a, logic [7:0] d);
    for (int b = 0; b < 8; b++) begin
      pulse(a, b, 0, d[b] ? OP_SET : OP_RESET);
      pulse(a, b, 1, d[b] ? OP_RESET : OP_SET);
    end
  endtask

  task automatic read(int a);
    sen = 1'b0; obs = 3'(a);
    #1 sen = 1'b1;
    #1;
  endtask

  initial begin : watchdog
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    logic [7:0] r;
    // before forming: writes have no effect, reads are noise
    write_word(0, 8'hFF);
    ones = 0;
    for (int k = 0; k < 16; k++) begin read(0); ones += (proba == 8'hFF); end
    check(ones < 16, "unformed array does not read back a write");
    // forming, then programming
    for (int a = 0; a < 8; a++)
      for (int b = 0; b < 8; b++) begin pulse(a, b, 0, OP_FORM); pulse(a, b, 1, OP_FORM); end
    for (int a = 0; a < 8; a++) begin
      words[a] = (a == 0) ? 8'hFF : (a == 1) ? 8'h00 : 8'($urandom);
      write_word(a, words[a]);
    end
    for (int a = 0; a < 8; a++) begin
      read(a);
      check(proba == words[a], $sformatf("read word %0d: %02x vs %02x", a, proba, words[a]));
    end
    // stochastic output over a full period
    for (int a = 0; a < 8; a++) begin
      read(a);
      chain_in = 1'b1;
      r = 8'($urandom_range(1, 255));
      ones = 0;
      for (int k = 0; k < 255; k++) begin
        rnd = r;
        #1 ones += chain_out;
        r = ref_next(r);
      end
      check(ones == int'(words[a]), $sformatf("word %0d: %0d ones over 255 steps", a, ones));
      for (int k = 0; k < 100; k++) begin
        chain_in = 1'($urandom); rnd = 8'($urandom);
        #1 check(chain_out == (chain_in & ref_psb(words[a], rnd)), "AND with incoming stream");
      end
    end
    // reprogram with complemented words
    for (int a = 0; a < 8; a++) begin words[a] = ~words[a]; write_word(a, words[a]); end
    for (int a = 0; a < 8; a++) begin
      read(a);
      check(proba == words[a], $sformatf("reprogrammed word %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
