// Testbench of lfsr: reset value, seed load, sequence against an
// independently written next-state function (explicit taps 8,6,5,4),
// period of exactly 255 with every non-zero value visited once, and hold
// when not enabled.
module tb_lfsr;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, en = 1'b0;
  logic [7:0] seed = 8'h00, q;
  int checks = 0, failures = 0;

  lfsr dut (.clk, .rst_n, .load, .seed, .en, .q);

  always #5 clk = ~clk;

  function automatic logic [7:0] ref_next(logic [7:0] s);
    return {s[6:0], s[7] ^ s[5] ^ s[4] ^ s[3]};
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] exp;
    bit seen [256];
    int first_return;
    repeat (2) @(posedge clk);
    check(q == 8'h01, "reset value");
    rst_n = 1'b1;
    for (int t = 0; t < 4; t++) begin
      seed = (t == 0) ? 8'hA5 : 8'(1 + $urandom_range(0, 254));
      @(negedge clk); load = 1'b1;
      @(negedge clk); load = 1'b0;
      check(q == seed, "seed loaded");
      exp = seed;
      foreach (seen[i]) seen[i] = 1'b0;
      first_return = -1;
      en = 1'b1;
      for (int k = 1; k <= 255; k++) begin
        seen[q] = 1'b1;
        @(negedge clk);
        exp = ref_next(exp);
        check(q == exp, $sformatf("step %0d", k));
        if (q == seed && first_return < 0) first_return = k;
      end
      en = 1'b0;
      check(first_return == 255, $sformatf("period %0d", first_return));
      begin
        int n;
        n = 0;
        for (int v = 1; v < 256; v++) n += seen[v];
        check(n == 255 && !seen[0], "all non-zero values visited");
      end
      repeat (3) @(negedge clk);
      check(q == seed, "hold when not enabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
