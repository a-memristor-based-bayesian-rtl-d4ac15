// Workload testbench: the scaled-up gesture-recognition machine.
//
// Configuration of the paper's design study: 4 rows (classes "1", "2", "3"
// and signature), 6 columns (six IMU features), observations quantised to
// 512 values (ADDR_W=9), so each array holds 512 x 8 bits = 4 kbit; uniform
// prior (row inputs tied high). The recorded IMU data set is not available,
// so the testbench builds a synthetic model of the same shape: each
// likelihood p(O_n | Y=y) is a Gaussian over the 512 values with a random
// mean and width, broadened by 1.3, normalised so that the largest value of
// each column is FF, and quantised with 0 standing for 1/256 and 255 for
// 256/256. Test gestures draw each observation from their class's Gaussian.
//
// All 24 arrays are formed and programmed through the command port
// (PULSE_CYCLES=1 to keep the run short). For each gesture the testbench
// reads the arrays and runs a conventional 255-cycle inference, a
// 50-cycle one and a power-conscious one, then a sweep of cycle budgets
// (5 to 255) with both strategies; every row count, winner and cycle count
// is checked exactly against a reference model. The agreement with exact
// Bayes on the stored tables and the accuracy against the true class for
// each budget are printed (synthetic data: not the published accuracies).
module tb_gesture_workload;
  import bm_pkg::*;
  localparam int NR = 4, NC = 6, AW = 9, WORDS = 512, NTEST = 24;
  logic clk = 1'b0, rst_n = 1'b0;
  logic seed_we = 1'b0;
  logic [2:0] seed_col = '0;
  logic [7:0] seed_data = '0;
  logic cmd_valid = 1'b0, cmd_ready;
  cmd_op_t cmd_op = CMD_READ;
  logic [1:0] cmd_row = '0;
  logic [2:0] cmd_col = '0;
  logic [AW-1:0] cmd_addr = '0;
  logic [7:0] cmd_data = '0, cmd_cycles = '0;
  logic cmd_pc = 1'b0, done;
  logic [NC-1:0][AW-1:0] obs_in = '0;
  logic [NR-1:0] prior = '1;
  logic [NR-1:0] post;
  logic infer_active;
  logic [7:0] infer_cycle;
  logic [NR-1:0][7:0] count;
  logic [1:0] best_row, first_row;
  logic first_valid;
  logic [NR-1:0][NC-1:0][7:0] proba;

  bayesian_machine #(.N_ROWS(NR), .N_COLS(NC), .ADDR_W(AW), .PROB_W(8), .PULSE_CYCLES(1)) dut (.*);

  always #5 clk = ~clk;

  logic [7:0] lk [NR][NC][WORDS];
  real mu [NR][NC], sg [NR][NC];
  logic [7:0] ref_rnd [NC];
  int checks = 0, failures = 0;
  localparam int SWEEP [5] = '{5, 10, 25, 50, 255};
  int sweep_conv [5] = '{default: 0};
  int sweep_pc [5] = '{default: 0};

  function automatic logic [7:0] ref_next(logic [7:0] s);
    return {s[6:0], s[7] ^ s[5] ^ s[4] ^ s[3]};
  endfunction
  function automatic logic ref_psb(logic [7:0] p, logic [7:0] r);
    for (int k = 7; k >= 0; k--) if (r[k]) return p[k];
    return 1'b0;
  endfunction
  function automatic real urand();
    return (real'($urandom_range(1, 1000000))) / 1000001.0;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic issue(cmd_op_t op, int row = 0, int col = 0, int adr = 0, int data = 0,
                       int cycles = 0, bit pc = 0);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1'b1; cmd_op = op; cmd_row = 2'(row); cmd_col = 3'(col);
    cmd_addr = AW'(adr); cmd_data = 8'(data); cmd_cycles = 8'(cycles); cmd_pc = pc;
    @(negedge clk);
    cmd_valid = 1'b0;
    while (!done) @(negedge clk);
  endtask

  task automatic infer(int cycles, bit pc, output int winner);
    int exp_cnt [NR];
    int exp_cycles, got_cycles, exp_first, best;
    bit exp_fv, stop;
    logic e [NR];
    foreach (exp_cnt[y]) exp_cnt[y] = 0;
    exp_cycles = 0; exp_fv = 0; exp_first = 0; stop = 0;
    for (int k = 0; k < cycles && !stop; k++) begin
      for (int y = 0; y < NR; y++) begin
        e[y] = 1'b1;
        for (int n = 0; n < NC; n++) e[y] &= ref_psb(lk[y][n][obs_in[n]], ref_rnd[n]);
        exp_cnt[y] += e[y];
      end
      if (!exp_fv) for (int y = NR - 1; y >= 0; y--) if (e[y]) begin exp_fv = 1; exp_first = y; end
      for (int y = 0; y < NR; y++) if (e[y] && pc) stop = 1;
      for (int n = 0; n < NC; n++) ref_rnd[n] = ref_next(ref_rnd[n]);
      exp_cycles++;
    end
    got_cycles = 0;
    fork
      issue(CMD_INFER, 0, 0, 0, 0, cycles, pc);
      begin
        @(negedge clk);
        while (!done) begin
          if (infer_active) got_cycles++;
          @(negedge clk);
        end
      end
    join
    check(got_cycles == exp_cycles, $sformatf("cycles %0d vs %0d", got_cycles, exp_cycles));
    for (int y = 0; y < NR; y++)
      check(int'(count[y]) == exp_cnt[y], $sformatf("row %0d count %0d vs %0d", y, count[y], exp_cnt[y]));
    best = 0;
    for (int y = 1; y < NR; y++) if (exp_cnt[y] > exp_cnt[best]) best = y;
    check(int'(best_row) == best, "most-ones row");
    check(first_valid == exp_fv && (!exp_fv || int'(first_row) == exp_first), "first-one row");
    winner = pc ? (first_valid ? int'(first_row) : -1) : int'(best_row);
  endtask

  initial begin : watchdog
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real p [WORDS];
    real pmax, s, u1, u2, z, lp, best_lp;
    int bayes, w255, w50, wpc, agree255 = 0, agree50 = 0, agreepc = 0, truth_ok = 0, q;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NC; n++) begin
      ref_rnd[n] = 8'($urandom_range(1, 255));
      @(negedge clk); seed_we = 1'b1; seed_col = 3'(n); seed_data = ref_rnd[n];
    end
    @(negedge clk); seed_we = 1'b0;
    // synthetic Gaussian likelihood model, normalised per column
    for (int n = 0; n < NC; n++) begin
      pmax = 0.0;
      for (int y = 0; y < NR; y++) begin
        mu[y][n] = 80.0 + 350.0 * urand();
        sg[y][n] = 25.0 + 60.0 * urand();
        s = 1.3 * sg[y][n];
        for (int a = 0; a < WORDS; a++) begin
          z = (real'(a) - mu[y][n]) / s;
          p[a] = $exp(-0.5 * z * z) / s;
          if (p[a] > pmax) pmax = p[a];
        end
      end
      for (int y = 0; y < NR; y++) begin
        s = 1.3 * sg[y][n];
        for (int a = 0; a < WORDS; a++) begin
          z = (real'(a) - mu[y][n]) / s;
          q = int'($floor(256.0 * ($exp(-0.5 * z * z) / s) / pmax + 0.5)) - 1;
          if (q < 0) q = 0;
          if (q > 255) q = 255;
          lk[y][n][a] = 8'(q);
        end
      end
    end
    for (int y = 0; y < NR; y++)
      for (int n = 0; n < NC; n++)
        for (int a = 0; a < WORDS; a++) begin
          issue(CMD_FORM, y, n, a);
          issue(CMD_WRITE, y, n, a, lk[y][n][a]);
        end
    $display("programmed %0d arrays of %0d words", NR * NC, WORDS);
    for (int t = 0; t < NTEST; t++) begin
      int cls;
      cls = t % NR;
      for (int n = 0; n < NC; n++) begin
        u1 = urand(); u2 = urand();
        z = $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
        q = int'($floor(mu[cls][n] + sg[cls][n] * z + 0.5));
        if (q < 0) q = 0;
        if (q > WORDS - 1) q = WORDS - 1;
        obs_in[n] = AW'(q);
      end
      issue(CMD_READ);
      for (int y = 0; y < NR; y++)
        for (int n = 0; n < NC; n++)
          check(proba[y][n] == lk[y][n][obs_in[n]], "likelihood read");
      // exact Bayes on the quantised tables
      bayes = 0; best_lp = -1.0e30;
      for (int y = 0; y < NR; y++) begin
        lp = 0.0;
        for (int n = 0; n < NC; n++) lp += $ln(real'(lk[y][n][obs_in[n]]) + 1.0);
        if (lp > best_lp) begin best_lp = lp; bayes = y; end
      end
      truth_ok += (bayes == cls);
      infer(255, 0, w255);
      infer(50, 0, w50);
      infer(255, 1, wpc);
      agree255 += (w255 == bayes);
      agree50 += (w50 == bayes);
      agreepc += (wpc == bayes);
      for (int i = 0; i < 5; i++) begin
        int w;
        infer(SWEEP[i], 0, w);
        sweep_conv[i] += (w == cls);
        infer(SWEEP[i], 1, w);
        sweep_pc[i] += (w == cls);
      end
    end
    $display("gestures=%0d  exact-Bayes=true class: %0d  machine=exact Bayes: 255 cycles %0d, 50 cycles %0d, power-conscious %0d",
             NTEST, truth_ok, agree255, agree50, agreepc);
    $display("correct classifications against cycle budget (conventional / power-conscious):");
    for (int i = 0; i < 5; i++)
      $display("  %3d cycles: %2d / %2d of %0d", SWEEP[i], sweep_conv[i], sweep_pc[i], NTEST);
    check(agree255 >= NTEST / 2, "255-cycle decisions mostly agree with exact Bayes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
