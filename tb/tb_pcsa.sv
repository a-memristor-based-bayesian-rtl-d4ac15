// Testbench of the pcsa model: precharge (both outputs high while SEN is
// low), the decision for every pair of distinct states, complementary
// outputs, holding the decision while SEN stays high even if the inputs
// change, and a read of two equal states giving both answers over many tries.
module tb_pcsa;
  import bm_pkg::*;
  logic sen = 1'b0;
  mem_state_t st_bl = MEM_UNFORMED, st_blb = MEM_UNFORMED;
  logic out, out_b;
  int checks = 0, failures = 0;

  pcsa dut (.*);

  initial begin : watchdog
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int rank(mem_state_t s);
    return s == MEM_LRS ? 2 : (s == MEM_HRS ? 1 : 0);
  endfunction

  initial begin
    mem_state_t states [3] = '{MEM_UNFORMED, MEM_HRS, MEM_LRS};
    int ones = 0;
    #1 check(out && out_b, "precharge");
    foreach (states[i]) foreach (states[j]) if (i != j) begin
      st_bl = states[i]; st_blb = states[j];
      #1 sen = 1'b1;
      #1 check(out == (rank(states[i]) > rank(states[j])) && out_b == !out,
               $sformatf("decision %0d/%0d", i, j));
      st_bl = states[j]; st_blb = states[i];
      #1 check(out == (rank(states[i]) > rank(states[j])), "held while SEN high");
      sen = 1'b0;
      #1 check(out && out_b, "precharge again");
    end
    st_bl = MEM_UNFORMED; st_blb = MEM_UNFORMED;
    for (int k = 0; k < 64; k++) begin
      #1 sen = 1'b1;
      #1 ones += out;
      sen = 1'b0;
    end
    check(ones > 0 && ones < 64, $sformatf("unformed cell reads random (%0d/64 ones)", ones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
