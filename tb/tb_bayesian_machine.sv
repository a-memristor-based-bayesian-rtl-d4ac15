// End-to-end testbench of bayesian_machine at its default (fabricated chip)
// size: 4 rows x 4 columns, 8 x 8-bit words per array, 255-cycle inference.
//
// It loads one seed per column, reads the arrays once before forming (they
// read as noise), forms and programs all 16 arrays word by word through the
// command port (block Y1/O4 holds the test pattern FE, FD, FB, F7, EF, DF,
// BF, 7F shown for it in the paper's measurement figure, the others random
// words with at least one FF per column), then for a series of random
// observation sets reads the arrays and runs inferences. A reference model
// in the testbench (its own LFSR and Gupta functions) predicts every row
// output bit; counts, most-ones row, first-one row and cycle counts are
// checked exactly. Conventional 255-cycle inferences, shorter ones and
// power-conscious early-stop inferences are mixed, and words are
// reprogrammed in between. Finally the logic is reset, as after a power
// cycle, and the stored likelihoods must still read back and infer
// correctly without reprogramming (non-volatile, instant on). Each
// mechanism is counted and must occur.
module tb_bayesian_machine;
  import bm_pkg::*;
  localparam int NR = 4, NC = 4, AW = 3, WORDS = 8;
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
  logic [NR-1:0] prior = '1;
  logic [NR-1:0] post;
  logic infer_active;
  logic [7:0] infer_cycle;
  logic [NR-1:0][7:0] count;
  logic [1:0] best_row, first_row;
  logic first_valid;
  logic [NR-1:0][NC-1:0][7:0] proba;

  bayesian_machine dut (.*);

  always #5 clk = ~clk;

  logic [7:0] lk [NR][NC][WORDS];
  logic [7:0] ref_rnd [NC];
  int checks = 0, failures = 0;
  int n_seed = 0, n_noise = 0, n_form = 0, n_write = 0, n_rewrite = 0, n_read = 0;
  int n_full = 0, n_short = 0, n_stop = 0, n_power_cycle = 0;
  real dev_sum = 0.0, dev_max = 0.0;
  int dev_n = 0;

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

  task automatic issue(cmd_op_t op, int row = 0, int col = 0, int adr = 0, int data = 0,
                       int cycles = 0, bit pc = 0);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1'b1; cmd_op = op; cmd_row = 2'(row); cmd_col = 2'(col);
    cmd_addr = AW'(adr); cmd_data = 8'(data); cmd_cycles = 8'(cycles); cmd_pc = pc;
    @(negedge clk);
    cmd_valid = 1'b0;
    while (!done) @(negedge clk);
  endtask

  // Runs one inference and checks it against the reference model.
  task automatic infer(int cycles, bit pc);
    int exp_cnt [NR];
    int exp_cycles, got_cycles, exp_first, bad, best;
    bit exp_fv, stop;
    logic e [NR];
    foreach (exp_cnt[y]) exp_cnt[y] = 0;
    exp_cycles = 0; exp_fv = 0; exp_first = 0; stop = 0;
    // reference
    for (int k = 0; k < cycles && !stop; k++) begin
      for (int y = 0; y < NR; y++) begin
        e[y] = prior[y];
        for (int n = 0; n < NC; n++) e[y] &= ref_psb(lk[y][n][obs_in[n]], ref_rnd[n]);
        exp_cnt[y] += e[y];
      end
      if (!exp_fv) for (int y = NR - 1; y >= 0; y--) if (e[y]) begin exp_fv = 1; exp_first = y; end
      for (int y = 0; y < NR; y++) if (e[y] && pc) stop = 1;
      for (int n = 0; n < NC; n++) ref_rnd[n] = ref_next(ref_rnd[n]);
      exp_cycles++;
    end
    // machine
    got_cycles = 0; bad = 0;
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
    // measured density against the product of the stored likelihoods
    if (!pc && cycles == 255)
      for (int y = 0; y < NR; y++) begin
        real expct, d;
        expct = 1.0;
        for (int n = 0; n < NC; n++) expct *= real'(lk[y][n][obs_in[n]]) / 255.0;
        d = real'(count[y]) / 255.0 - expct;
        if (d < 0.0) d = -d;
        dev_sum += d; dev_n++;
        if (d > dev_max) dev_max = d;
      end
    if (pc && exp_cycles < cycles) n_stop++;
    else if (cycles == 255) n_full++;
    else n_short++;
  endtask

  task automatic read_and_check();
    issue(CMD_READ);
    n_read++;
    for (int y = 0; y < NR; y++)
      for (int n = 0; n < NC; n++)
        check(proba[y][n] == lk[y][n][obs_in[n]], $sformatf("likelihood y%0d n%0d", y, n));
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] fig_pattern [WORDS] = '{8'hFE, 8'hFD, 8'hFB, 8'hF7, 8'hEF, 8'hDF, 8'hBF, 8'h7F};
    int noise;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // LFSR seed loading
    for (int n = 0; n < NC; n++) begin
      ref_rnd[n] = 8'($urandom_range(1, 255));
      @(negedge clk); seed_we = 1'b1; seed_col = 2'(n); seed_data = ref_rnd[n];
      n_seed++;
    end
    @(negedge clk); seed_we = 1'b0;
    // reading before forming gives noise, not the words that will be stored
    noise = 0;
    for (int t = 0; t < 4; t++) begin
      issue(CMD_READ);
      for (int y = 0; y < NR; y++) for (int n = 0; n < NC; n++) noise += (proba[y][n] != 8'hFF);
    end
    check(noise > 0, "unformed arrays read as noise");
    if (noise > 0) n_noise++;
    // likelihood tables
    for (int y = 0; y < NR; y++)
      for (int n = 0; n < NC; n++)
        for (int a = 0; a < WORDS; a++) lk[y][n][a] = 8'($urandom_range(0, 254));
    for (int n = 0; n < NC; n++) lk[$urandom_range(0, NR - 1)][n][$urandom_range(0, WORDS - 1)] = 8'hFF;
    for (int a = 0; a < WORDS; a++) lk[0][3][a] = fig_pattern[a];
    // forming and complementary programming, word by word
    for (int y = 0; y < NR; y++)
      for (int n = 0; n < NC; n++)
        for (int a = 0; a < WORDS; a++) begin
          issue(CMD_FORM, y, n, a);
          n_form++;
          issue(CMD_WRITE, y, n, a, lk[y][n][a]);
          n_write++;
        end
    // inferences
    for (int t = 0; t < 12; t++) begin
      for (int n = 0; n < NC; n++) obs_in[n] = AW'($urandom);
      if (t == 0) obs_in = '0;
      read_and_check();
      infer(255, 0);
      if (t % 3 == 1) infer($urandom_range(1, 100), 0);
      if (t % 2 == 0) infer(255, 1);
      if (t % 4 == 3) begin
        int y, n, a;
        y = $urandom_range(0, NR - 1); n = $urandom_range(0, NC - 1); a = $urandom_range(0, WORDS - 1);
        lk[y][n][a] = ~lk[y][n][a];
        issue(CMD_WRITE, y, n, a, lk[y][n][a]);
        n_rewrite++;
        obs_in[n] = AW'(a);
        read_and_check();
        infer(255, 0);
      end
    end
    // instant on: reset the logic (as after a power cycle); the arrays keep
    // their contents, so after reloading the seeds a read and an inference
    // work with no reprogramming
    @(negedge clk) rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    n_power_cycle++;
    for (int n = 0; n < NC; n++) begin
      ref_rnd[n] = 8'($urandom_range(1, 255));
      @(negedge clk); seed_we = 1'b1; seed_col = 2'(n); seed_data = ref_rnd[n];
      n_seed++;
    end
    @(negedge clk); seed_we = 1'b0;
    for (int n = 0; n < NC; n++) obs_in[n] = AW'($urandom);
    read_and_check();
    infer(255, 0);
    $display("mechanisms: seed_load=%0d unformed_noise=%0d form=%0d write=%0d rewrite=%0d read=%0d",
             n_seed, n_noise, n_form, n_write, n_rewrite, n_read);
    $display("            full_255=%0d short=%0d power_conscious_stop=%0d power_cycle=%0d",
             n_full, n_short, n_stop, n_power_cycle);
    check(n_power_cycle > 0, "restart without reprogramming exercised");
    check(n_seed > 0 && n_noise > 0 && n_form > 0 && n_write > 0 && n_rewrite > 0 && n_read > 0,
          "programming mechanisms all exercised");
    check(n_full > 0, "full-period inference exercised");
    $display("255-cycle output density vs product of likelihoods: mean |error| %0.4f, max %0.4f over %0d rows",
             dev_sum / dev_n, dev_max, dev_n);
    check(dev_max < 0.25, "output density follows the product of likelihoods");
    check(n_short > 0, "short inference exercised");
    check(n_stop > 0, "power-conscious stop exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
