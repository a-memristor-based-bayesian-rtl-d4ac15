// Testbench of column_decoder: random addresses and enables; each of the
// three outputs must be the one-hot code of its own address when enabled
// and zero otherwise.
module tb_column_decoder;
  logic bl_en, blb_en, sl_en;
  logic [2:0] bl_adr, blb_adr, sl_adr;
  logic [7:0] bl, blb, sl;
  int checks = 0, failures = 0;

  column_decoder #(.COL_ADDR_W(3)) dut (.*);

  initial begin : watchdog
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 300; i++) begin
      {bl_en, blb_en, sl_en} = 3'($urandom);
      bl_adr = 3'($urandom); blb_adr = 3'($urandom); sl_adr = 3'($urandom);
      #1;
      checks++;
      if (bl  !== (bl_en  ? 8'(1 << bl_adr)  : 8'h00) ||
          blb !== (blb_en ? 8'(1 << blb_adr) : 8'h00) ||
          sl  !== (sl_en  ? 8'(1 << sl_adr)  : 8'h00)) begin
        failures++;
        $display("FAIL bl=%b blb=%b sl=%b", bl, blb, sl);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
