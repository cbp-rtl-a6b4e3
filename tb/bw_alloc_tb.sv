// bw_alloc_tb: self-checking test of the bandwidth allocator.
//
// Computes the expected allocation independently
// (MIN_BW + floor(d[i] * (TOTAL_BW - N*MIN_BW) / sum(d))) for random,
// skewed and all-zero delay vectors, checks the allocator against it, checks
// that the sum never exceeds TOTAL_BW, that the snapshot makes the result
// immune to delay changes during the computation, and checks the
// start-to-done latency of N + N*(NUM_W+1) + 1 cycles.
module bw_alloc_tb;
  localparam int unsigned N = 4, TOTAL = 16000, MINBW = 1000, D_W = 24;
  localparam int unsigned BW_W = $clog2(TOTAL + 1);
  localparam int unsigned NUM_W = D_W + BW_W;
  localparam int unsigned LAT = N + N * (NUM_W + 1) + 1;

  logic clk = 0, rst_n = 0, start = 0;
  logic [D_W-1:0]  qdelay [N];
  logic [BW_W-1:0] bw [N];
  logic done, busy;
  int checks = 0, failures = 0;

  bw_alloc #(.N_APPS(N), .TOTAL_BW(TOTAL), .MIN_BW(MINBW), .D_W(D_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_and_check(string what, input logic scramble);
    longint unsigned d [N], tot, exp;
    int unsigned cyc, sum;
    tot = 0;
    for (int i = 0; i < N; i++) begin d[i] = qdelay[i]; tot += d[i]; end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;   // edges after the one that sampled start
    while (!done) begin
      if (scramble) for (int i = 0; i < N; i++) qdelay[i] = D_W'($urandom);
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != LAT) begin failures++; $display("FAIL %s: latency %0d expected %0d", what, cyc, LAT); end
    sum = 0;
    for (int i = 0; i < N; i++) begin
      exp = (tot == 0) ? MINBW + (TOTAL - N * MINBW) / N
                       : MINBW + (d[i] * (TOTAL - N * MINBW)) / tot;
      checks++;
      sum += bw[i];
      if (bw[i] != BW_W'(exp)) begin
        failures++;
        $display("FAIL %s: app %0d bw %0d expected %0d", what, i, bw[i], exp);
      end
    end
    checks++;
    if (sum > TOTAL) begin failures++; $display("FAIL %s: sum %0d", what, sum); end
  endtask

  initial begin
    foreach (qdelay[i]) qdelay[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (bw[i] != BW_W'(TOTAL / N)) failures++;
    end
    // lbm-like: one application with three times the delay of another.
    qdelay[0] = 3000; qdelay[1] = 1000; qdelay[2] = 0; qdelay[3] = 0;
    run_and_check("skew", 0);
    checks++;
    if (bw[0] != 1000 + 9000 || bw[1] != 1000 + 3000 || bw[2] != 1000) failures++;
    foreach (qdelay[i]) qdelay[i] = '0;
    run_and_check("zero", 0);
    for (int t = 0; t < 100; t++) begin
      foreach (qdelay[i]) qdelay[i] = D_W'($urandom);
      run_and_check("random", 0);
    end
    for (int t = 0; t < 20; t++) begin
      foreach (qdelay[i]) qdelay[i] = D_W'($urandom);
      run_and_check("snapshot", 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
