// cache_alloc_tb: self-checking test of the Lookahead cache allocator.
//
// Compares the allocator with a behavioural Lookahead written here
// (min_ways floor, then repeated rounds giving the best marginal utility
// block to the application with the largest one) on random and on
// hand-made hit curves. Also checks the equal split out of reset, that the
// units always add up, and that the minimum is respected.
module cache_alloc_tb;
  localparam int unsigned N = 4, UNITS = 16, MINU = 2, CNT_W = 16;
  localparam int unsigned AW = $clog2(UNITS + 1);

  logic clk = 0, rst_n = 0, start = 0;
  logic [CNT_W-1:0] hits  [N][UNITS];
  logic [AW-1:0]    alloc [N];
  logic done, busy;
  int checks = 0, failures = 0;

  cache_alloc #(.N_APPS(N), .UNITS(UNITS), .MIN_UNITS(MINU), .CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference Lookahead. Utility of k more units from a: sum of hits[a..a+k-1].
  task automatic model(output int unsigned res [N]);
    int unsigned a [N];
    int unsigned balance, bs [N], bk [N], winner;
    longint unsigned s;
    logic have;
    foreach (a[i]) a[i] = MINU;
    balance = UNITS - N * MINU;
    while (balance > 0) begin
      for (int i = 0; i < N; i++) begin
        bs[i] = 0; bk[i] = 0; s = 0;
        for (int k = 1; k <= balance && a[i] + k <= UNITS; k++) begin
          s += hits[i][a[i] + k - 1];
          if (k == 1 || s * bk[i] > longint'(bs[i]) * k) begin bs[i] = s; bk[i] = k; end
        end
      end
      have = 0; winner = 0;
      for (int i = 0; i < N; i++)
        if (bk[i] != 0 && (!have || longint'(bs[i]) * bk[winner] > longint'(bs[winner]) * bk[i])) begin
          winner = i; have = 1;
        end
      a[winner] += bk[winner];
      balance -= bk[winner];
    end
    res = a;
  endtask

  task automatic run_and_check(string what);
    int unsigned exp [N];
    int unsigned total;
    model(exp);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    total = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      total += alloc[i];
      if (alloc[i] != AW'(exp[i])) begin
        failures++;
        $display("FAIL %s: app %0d got %0d expected %0d", what, i, alloc[i], exp[i]);
      end
      checks++;
      if (alloc[i] < MINU) failures++;
    end
    checks++;
    if (total != UNITS) begin failures++; $display("FAIL %s: total %0d", what, total); end
  endtask

  initial begin
    foreach (hits[i, p]) hits[i][p] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (alloc[i] != AW'(UNITS / N)) failures++;
    end
    // Directed: app 2 gains a lot at depth 2..9 (a cliff), app 0 a little
    // everywhere; app 2 must get most of the cache.
    foreach (hits[i, p]) hits[i][p] = '0;
    for (int p = 0; p < UNITS; p++) hits[0][p] = 3;
    for (int p = 2; p < 10; p++) hits[2][p] = 40;
    run_and_check("cliff");
    checks++;
    if (alloc[2] != 10) begin failures++; $display("FAIL cliff: app2 %0d", alloc[2]); end
    // All zero: everything still handed out.
    foreach (hits[i, p]) hits[i][p] = '0;
    run_and_check("zero");
    // Random decreasing and random arbitrary curves.
    for (int t = 0; t < 200; t++) begin
      foreach (hits[i, p]) hits[i][p] = (t % 2) ? CNT_W'($urandom_range(1000))
                                                : CNT_W'($urandom_range(1000) >> (p / 2));
      run_and_check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
