// Testbench of gupta: all 65536 (proba, rnd) pairs against a reference
// written from the other direction (find the highest set random bit k, the
// output is proba[k]); and, for every proba, that a full LFSR-like sweep of
// the 255 non-zero random words gives exactly proba ones.
module tb_gupta;
  logic [7:0] proba, rnd;
  logic psb;
  int checks = 0, failures = 0;

  gupta dut (.proba, .rnd, .psb);

  function automatic logic ref_psb(logic [7:0] p, logic [7:0] r);
    for (int k = 7; k >= 0; k--) if (r[k]) return p[k];
    return 1'b0;
  endfunction

  initial begin : watchdog
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bad = 0;
    for (int p = 0; p < 256; p++) begin
      int ones;
      ones = 0;
      for (int r = 0; r < 256; r++) begin
        proba = 8'(p); rnd = 8'(r);
        #1;
        if (psb !== ref_psb(proba, rnd)) bad++;
        if (r != 0) ones += psb;
      end
      checks++;
      if (ones != p) begin
        failures++;
        $display("FAIL proba=%0d gives %0d ones over 255 words", p, ones);
      end
    end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %0d pairs differ from reference", bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
