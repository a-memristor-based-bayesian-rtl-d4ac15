// Testbench of digital_control_unit (4 x 4 machine, PULSE_CYCLES=3).
// A monitor records every programming pulse (block enable, bit column,
// side, operation, width, address on the observation wires) and every
// inference cycle. Checks: seed loading into each column LFSR; CMD_FORM
// gives 16 forming pulses of the right width on the right block; CMD_WRITE
// gives the complementary SET/RESET pattern of the data word; the command
// latency; CMD_READ latches the observations and raises SEN after one
// precharge cycle; CMD_INFER runs exactly the requested number of cycles,
// steps the LFSRs like a reference LFSR and brings them back to the seed
// after 255 cycles; the power-conscious mode stops on the first cycle
// with a one on any row.
module tb_digital_control_unit;
  import bm_pkg::*;
  localparam int NR = 4, NC = 4, AW = 3, PC = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic seed_we = 1'b0;
  logic [1:0] seed_col = '0;
  logic [7:0] seed_data = '0;
  logic cmd_valid = 1'b0, cmd_ready;
  cmd_op_t cmd_op = CMD_READ;
  logic [1:0] cmd_row = '0, cmd_col = '0;
  logic [AW-1:0] cmd_addr = '0;
  logic [7:0] cmd_data = '0, cmd_cycles = '0;
  logic cmd_pc = 1'b0, done;
  logic [NC-1:0][AW-1:0] obs_in = '0;
  logic [NR-1:0] post = '0;
  logic sen;
  logic [NC-1:0][AW-1:0] obs;
  logic [NC-1:0][7:0] rnd;
  logic [NR-1:0][NC-1:0] prog_blk_en;
  logic [2:0] prog_col;
  logic prog_side;
  prog_op_t prog_op;
  logic prog_pulse, infer_start, infer_active;
  logic [7:0] infer_cycle;
  int checks = 0, failures = 0;

  digital_control_unit #(.N_ROWS(NR), .N_COLS(NC), .ADDR_W(AW), .PROB_W(8), .PULSE_CYCLES(PC)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [7:0] ref_next(logic [7:0] s);
    return {s[6:0], s[7] ^ s[5] ^ s[4] ^ s[3]};
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // pulse monitor
  typedef struct { logic [NR-1:0][NC-1:0] en; int col; bit side; prog_op_t op; int width; logic [AW-1:0] adr; } pulse_t;
  pulse_t pulses [$];
  int width = 0;
  int active_cycles = 0;
  always @(posedge clk) begin
    if (prog_pulse) begin
      if (width == 0) pulses.push_back('{prog_blk_en, int'(prog_col), prog_side, prog_op, 0, obs[0]});
      width++;
    end else if (width != 0) begin
      pulses[$].width = width;
      width = 0;
    end
    if (infer_active) active_cycles++;
  end

  task automatic issue(cmd_op_t op, int row = 0, int col = 0, int adr = 0, int data = 0,
                       int cycles = 0, bit pc = 0, output int latency);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1'b1; cmd_op = op; cmd_row = 2'(row); cmd_col = 2'(col);
    cmd_addr = AW'(adr); cmd_data = 8'(data); cmd_cycles = 8'(cycles); cmd_pc = pc;
    @(negedge clk);
    cmd_valid = 1'b0;
    latency = 1;
    while (!done) begin @(negedge clk); latency++; end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] seeds [NC];
    logic [7:0] r [NC];
    int lat, ok;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // seeds
    for (int n = 0; n < NC; n++) begin
      seeds[n] = 8'($urandom_range(1, 255));
      @(negedge clk); seed_we = 1'b1; seed_col = 2'(n); seed_data = seeds[n];
    end
    @(negedge clk); seed_we = 1'b0;
    for (int n = 0; n < NC; n++) check(rnd[n] == seeds[n], $sformatf("seed col %0d", n));
    // forming
    pulses.delete();
    issue(CMD_FORM, 2, 1, 5, 0, 0, 0, lat);
    check(pulses.size() == 16, $sformatf("forming pulses %0d", pulses.size()));
    check(lat == 16 * (PC + 2) + 1, $sformatf("forming latency %0d", lat));
    ok = 1;
    foreach (pulses[i]) begin
      logic [NR-1:0][NC-1:0] e1 = '0;
      e1[2][1] = 1'b1;
      if (pulses[i].en != e1 || pulses[i].col != i / 2 || pulses[i].side != i[0] ||
          pulses[i].op != OP_FORM || pulses[i].width != PC || pulses[i].adr != 5) ok = 0;
    end
    check(ok == 1, "forming pulse sequence");
    // complementary write
    for (int t = 0; t < 3; t++) begin
      int d, row, col, adr;
      d = (t == 0) ? 8'hA6 : $urandom_range(0, 255);
      row = $urandom_range(0, 3); col = $urandom_range(0, 3); adr = $urandom_range(0, 7);
      pulses.delete();
      issue(CMD_WRITE, row, col, adr, d, 0, 0, lat);
      check(pulses.size() == 16, "write pulses");
      ok = 1;
      foreach (pulses[i]) begin
        bit b;
        prog_op_t exp;
        b = d[i / 2];
        exp = (i[0] == 0) ? (b ? OP_SET : OP_RESET) : (b ? OP_RESET : OP_SET);
        if (pulses[i].op != exp || pulses[i].en[row][col] != 1'b1 || $countones(pulses[i].en) != 1 ||
            pulses[i].adr != AW'(adr) || pulses[i].width != PC) ok = 0;
      end
      check(ok == 1, $sformatf("complementary write of %02x", d));
    end
    // read
    for (int n = 0; n < NC; n++) obs_in[n] = AW'($urandom);
    issue(CMD_READ, 0, 0, 0, 0, 0, 0, lat);
    check(lat == 2 && obs == obs_in, "read latency and latched observations");
    @(negedge clk);
    check(sen == 1'b1, "SEN high after read");
    obs_in = ~obs_in;
    @(negedge clk);
    check(obs != obs_in, "observations held after read");
    // inference: 255 cycles returns LFSRs to their seeds
    for (int n = 0; n < NC; n++) r[n] = seeds[n];
    active_cycles = 0;
    fork
      issue(CMD_INFER, 0, 0, 0, 0, 255, 0, lat);
      begin
        ok = 1;
        @(posedge infer_active);
        @(negedge clk);
        while (infer_active) begin
          for (int n = 0; n < NC; n++) begin
            if (rnd[n] != r[n]) ok = 0;
            r[n] = ref_next(r[n]);
          end
          @(negedge clk);
        end
        for (int n = 0; n < NC; n++) if (rnd[n] != r[n]) ok = 0;
      end
    join
    check(ok == 1, "LFSR sequences during inference");
    check(active_cycles == 255, $sformatf("inference cycles %0d", active_cycles));
    for (int n = 0; n < NC; n++) check(rnd[n] == seeds[n], "LFSR back at seed after 255 cycles");
    // shorter inference
    active_cycles = 0;
    issue(CMD_INFER, 0, 0, 0, 0, 50, 0, lat);
    check(active_cycles == 50, "50-cycle inference");
    check(lat == 50 + 1, $sformatf("50-cycle inference latency %0d", lat));
    // power-conscious stop: a one appears on row 2 in the sixth cycle
    active_cycles = 0;
    fork
      issue(CMD_INFER, 0, 0, 0, 0, 255, 1, lat);
      begin
        @(posedge infer_active);
        repeat (6) @(negedge clk);
        post = 4'b0100;
        @(negedge clk);
        post = '0;
      end
    join
    check(active_cycles == 6, $sformatf("power-conscious stop after %0d cycles", active_cycles));
    // zero cycles
    active_cycles = 0;
    issue(CMD_INFER, 0, 0, 0, 0, 0, 0, lat);
    check(active_cycles == 0 && lat == 1, "zero-cycle inference");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
