// Testbench of the memristor_array model: all devices start unformed; SET
// and RESET leave unformed devices alone; forming gives LRS; SET/RESET then
// switch a single selected device and no other; read-out follows the word
// line. A shadow array kept by the testbench is compared after every pulse.
module tb_memristor_array;
  import bm_pkg::*;
  localparam int R = 8, C = 8;
  logic [R-1:0] wl = '0;
  logic [C-1:0] bl = '0, blb = '0, sl = '0;
  prog_op_t prog_op = OP_FORM;
  logic prog_pulse = 1'b0;
  mem_state_t st_bl [C], st_blb [C];
  mem_state_t sh_l [R][C], sh_r [R][C];
  int checks = 0, failures = 0;

  memristor_array #(.ROWS(R), .COLS(C)) dut (.*);

  initial begin : watchdog
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse(int r, int c, bit side, prog_op_t op);
    wl = '0; bl = '0; blb = '0; sl = '0;
    wl[r] = 1'b1; sl[c] = 1'b1;
    if (side) blb[c] = 1'b1; else bl[c] = 1'b1;
    prog_op = op;
    #1 prog_pulse = 1'b1;
    #1 prog_pulse = 1'b0;
    #1 wl = '0; bl = '0; blb = '0; sl = '0;
    // shadow
    begin
      mem_state_t s;
      s = side ? sh_r[r][c] : sh_l[r][c];
      case (op)
        OP_FORM:  s = MEM_LRS;
        OP_SET:   if (s != MEM_UNFORMED) s = MEM_LRS;
        OP_RESET: if (s != MEM_UNFORMED) s = MEM_HRS;
        default: ;
      endcase
      if (side) sh_r[r][c] = s; else sh_l[r][c] = s;
    end
  endtask

  task automatic compare_all(string what);
    int bad = 0;
    for (int r = 0; r < R; r++) begin
      wl = '0; wl[r] = 1'b1;
      #1;
      for (int c = 0; c < C; c++)
        if (st_bl[c] != sh_l[r][c] || st_blb[c] != sh_r[r][c]) bad++;
    end
    wl = '0;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %s: %0d cells differ", what, bad); end
  endtask

  initial begin
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin sh_l[r][c] = MEM_UNFORMED; sh_r[r][c] = MEM_UNFORMED; end
    #1 compare_all("after fabrication");
    pulse(2, 3, 0, OP_SET);
    pulse(2, 3, 1, OP_RESET);
    compare_all("SET/RESET on unformed");
    checks++;
    wl = 8'h04; #1;
    if (st_bl[3] != MEM_UNFORMED) begin failures++; $display("FAIL set on unformed"); end
    wl = '0;
    for (int i = 0; i < 200; i++) begin
      int op;
      op = $urandom_range(0, 2);
      pulse($urandom_range(0, R - 1), $urandom_range(0, C - 1), 1'($urandom),
            op == 0 ? OP_FORM : (op == 1 ? OP_SET : OP_RESET));
      if (i % 20 == 19) compare_all($sformatf("random pulses %0d", i));
    end
    // form everything, then check a SET/RESET round trip on one device
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin pulse(r, c, 0, OP_FORM); pulse(r, c, 1, OP_FORM); end
    pulse(5, 6, 1, OP_RESET);
    compare_all("after forming all and one RESET");
    checks++;
    wl = 8'h20; #1;
    if (st_blb[6] != MEM_HRS || st_bl[6] != MEM_LRS) begin failures++; $display("FAIL reset one"); end
    wl = '0;
    pulse(5, 6, 1, OP_SET);
    compare_all("SET back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
