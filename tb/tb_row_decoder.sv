// Testbench of row_decoder: every address, enabled and disabled, against
// the one-hot word it should give.
module tb_row_decoder;
  logic en;
  logic [2:0] adr;
  logic [7:0] wl;
  int checks = 0, failures = 0;

  row_decoder #(.ADDR_W(3)) dut (.en, .adr, .wl);

  initial begin : watchdog
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 8; a++) begin
        en = 1'(e); adr = 3'(a);
        #1;
        checks++;
        if (wl !== (e ? 8'(1 << a) : 8'h00)) begin
          failures++;
          $display("FAIL en=%0d adr=%0d wl=%b", e, a, wl);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
