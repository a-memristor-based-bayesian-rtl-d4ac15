// Testbench of decision_unit: random row streams with a different density
// per row, several inferences; counts, most-ones row and first-one row are
// compared with values the testbench keeps itself. Also checks that start
// clears the previous result and that nothing is counted while inactive.
module tb_decision_unit;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, active = 1'b0;
  logic [N-1:0] post = '0;
  logic [N-1:0][7:0] count;
  logic [1:0] best_row, first_row;
  logic first_valid;
  int checks = 0, failures = 0;

  decision_unit #(.N_ROWS(N), .CNT_W(8)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt [N];
    int dens [N];
    int fr, best, cycles;
    bit fv;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20; t++) begin
      foreach (dens[y]) dens[y] = $urandom_range(0, 60);
      cycles = (t == 0) ? 255 : $urandom_range(1, 255);
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      check(count == '0 && !first_valid, "start clears");
      foreach (cnt[y]) cnt[y] = 0;
      fv = 0; fr = 0;
      for (int k = 0; k < cycles; k++) begin
        for (int y = 0; y < N; y++) post[y] = ($urandom_range(0, 99) < dens[y]);
        active = 1'b1;
        for (int y = 0; y < N; y++) cnt[y] += post[y];
        if (!fv && post != '0) begin
          fv = 1;
          for (int y = N - 1; y >= 0; y--) if (post[y]) fr = y;
        end
        @(negedge clk);
      end
      active = 1'b0;
      post = '1;
      @(negedge clk);   // inactive: nothing counted
      best = 0;
      for (int y = 1; y < N; y++) if (cnt[y] > cnt[best]) best = y;
      for (int y = 0; y < N; y++) check(int'(count[y]) == cnt[y], $sformatf("count row %0d", y));
      check(int'(best_row) == best, "best row");
      check(first_valid == fv && (!fv || int'(first_row) == fr), "first row");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
