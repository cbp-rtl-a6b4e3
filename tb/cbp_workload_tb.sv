// cbp_workload_tb: the 14 evaluated 16-program workload mixes, played by
// synthetic programs.
//
// Each mix is given by how many of its 16 programs are sensitive to cache
// (C), bandwidth (B) and prefetching (P), e.g. w1 = 4 CBP, 5 CB, 3 BP,
// 3 C, 1 B. A synthetic program with those sensitivities is built as:
//   C  reuses 12 lines per set (needs 12 units, more than the 4-unit
//      minimum); otherwise 2 lines per set
//   B  always has an LLC miss waiting; otherwise one miss in 32 cycles
//   P  retires 4 instructions per cycle with prefetching, 2 without;
//      otherwise 2 with and 3 without (prefetching hurts)
// The manager runs at its default sizes (16 programs, 256 cache units,
// 64 GB/s) with a shortened interval (400 ticks, 20-tick windows, a tick
// per cycle) so that all 14 mixes fit in one run. For each mix it checks,
// after the first reconfiguration: every P program has its prefetcher on
// and every other off; the cache allocation equals a Lookahead computed
// here from the ATD counters and gives every C program its whole working
// set; the bandwidth allocation equals the proportional formula and gives
// every B program more than any non-B program.
// The published type counts of w9 add up to 15 programs; one insensitive
// program is added to make 16.
module cbp_workload_tb;
  localparam int unsigned N = 16, UNITS = 256, MINU = 4;
  localparam int unsigned TOTAL_BW = 64000, MIN_BW = 1000;
  localparam int unsigned SET_BITS = 9, SLOG2 = 4, LINE_W = 42;
  localparam int unsigned MEM_LAT = 40, WS_C = 12, WS_N = 2;
  localparam int unsigned AW = $clog2(UNITS + 1), BW_W = $clog2(TOTAL_BW + 1);

  typedef struct packed { logic c, b, p; } cls_t;

  logic clk = 0, rst_n = 0, tick = 0;
  logic [N-1:0]      llc_valid, miss_valid, miss_ready, mem_valid, mem_ready, mem_resp;
  logic [LINE_W-1:0] llc_line [N];
  logic [2:0]        inst_ret [N];
  logic [AW-1:0]     cache_units [N];
  logic [BW_W-1:0]   bw_mbps [N];
  logic [N-1:0]      pf_enable;
  cbp_pkg::phase_e   phase;

  cbp_top #(.SAMPLE_TICKS(20), .RECONF_TICKS(400), .PREF_INT_TICKS(400)) dut (.*);

  int checks = 0, failures = 0;
  cls_t cls [N];
  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic want(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // Type counts per mix: {CBP, CB, BP, CP, C, B, I}.
  int unsigned mix [14][7] = '{
    '{4, 5, 3, 0, 3, 1, 0}, '{3, 5, 5, 0, 2, 1, 0}, '{0, 0, 6, 0, 1, 5, 4},
    '{1, 2, 5, 0, 3, 2, 3}, '{5, 10, 1, 0, 0, 0, 0}, '{3, 5, 4, 0, 2, 2, 0},
    '{2, 2, 3, 0, 5, 0, 4}, '{4, 4, 3, 2, 0, 3, 0}, '{2, 5, 2, 0, 3, 1, 3},
    '{2, 3, 6, 0, 1, 2, 2}, '{2, 4, 4, 0, 1, 2, 3}, '{6, 8, 0, 0, 2, 0, 0},
    '{3, 2, 4, 0, 4, 0, 3}, '{5, 2, 5, 0, 1, 1, 2}};
  cls_t kinds [7] = '{3'b111, 3'b110, 3'b011, 3'b101, 3'b100, 3'b010, 3'b000};

  // ---------------------------------------------------------------- traffic
  int unsigned cyc = 0;
  int unsigned ptr [N];
  always @(negedge clk) begin
    cyc++;
    tick <= rst_n;
    for (int a = 0; a < N; a++) begin
      int unsigned ws, set;
      ws = cls[a].c ? WS_C : WS_N;
      set = ((ptr[a] / ws) % 2) << SLOG2;
      llc_valid[a] = rst_n;
      llc_line[a]  = LINE_W'({32'(16 + a * 64 + (ptr[a] % ws)), SET_BITS'(set)});
      ptr[a]++;
      inst_ret[a] = cls[a].p ? (pf_enable[a] ? 3'd4 : 3'd2) : (pf_enable[a] ? 3'd2 : 3'd3);
      if (!rst_n) miss_valid[a] = 0;
      else if (!miss_valid[a]) miss_valid[a] = cls[a].b || ($urandom_range(31) == 0);
      mem_ready[a] = 1;
    end
  end
  int unsigned due [N][$];
  always @(negedge clk) for (int a = 0; a < N; a++)
    mem_resp[a] = rst_n && due[a].size() != 0 && due[a][0] == cyc;
  always @(posedge clk) begin
    for (int a = 0; a < N; a++) begin
      if (!rst_n) due[a].delete();
      else begin
        if (mem_resp[a]) void'(due[a].pop_front());
        if (mem_valid[a] && mem_ready[a]) due[a].push_back(cyc + MEM_LAT);
        if (miss_valid[a] && miss_ready[a]) miss_valid[a] <= 0;
      end
    end
  end

  task automatic lookahead(input longint unsigned h [N][UNITS], output int unsigned res [N]);
    int unsigned a [N], bk [N], balance, winner;
    longint unsigned bs [N], s;
    logic have;
    foreach (a[i]) a[i] = MINU;
    balance = UNITS - N * MINU;
    while (balance > 0) begin
      for (int i = 0; i < N; i++) begin
        bs[i] = 0; bk[i] = 0; s = 0;
        for (int k = 1; k <= balance && a[i] + k <= UNITS; k++) begin
          s += h[i][a[i] + k - 1];
          if (k == 1 || s * bk[i] > bs[i] * k) begin bs[i] = s; bk[i] = k; end
        end
      end
      have = 0; winner = 0;
      for (int i = 0; i < N; i++)
        if (bk[i] != 0 && (!have || bs[i] * bk[winner] > bs[winner] * bk[i])) begin
          winner = i; have = 1;
        end
      a[winner] += bk[winner];
      balance -= bk[winner];
    end
    res = a;
  endtask

  task automatic run_mix(int w);
    longint unsigned h [N][UNITS];
    longint unsigned d [N], tot;
    int unsigned exp_c [N], n, minb, maxnb;
    logic [N-1:0] exp_pf;
    // Assign classes.
    n = 0;
    for (int k = 0; k < 7; k++)
      for (int j = 0; j < mix[w][k]; j++) begin cls[n] = kinds[k]; n++; end
    while (n < N) begin cls[n] = 3'b000; n++; end
    for (int a = 0; a < N; a++) begin exp_pf[a] = cls[a].p; ptr[a] = 0; end
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // First decision, then the reconfiguration.
    while (!dut.pf_decide) @(negedge clk);
    @(negedge clk);
    want(pf_enable == exp_pf, $sformatf("w%0d prefetch %b expected %b", w + 1, pf_enable, exp_pf));
    while (!dut.cache_start) @(negedge clk);
    @(negedge clk);
    for (int a = 0; a < N; a++) for (int p = 0; p < UNITS; p++) h[a][p] = dut.hits[a][p];
    lookahead(h, exp_c);
    while (!dut.cache_done) @(negedge clk);
    @(negedge clk);
    for (int a = 0; a < N; a++) begin
      want(cache_units[a] == AW'(exp_c[a]), $sformatf("w%0d app %0d cache %0d expected %0d", w + 1, a, cache_units[a], exp_c[a]));
      if (cls[a].c) want(cache_units[a] >= WS_C, $sformatf("w%0d app %0d gets its working set", w + 1, a));
    end
    while (!dut.atd_halve) @(negedge clk);
    @(negedge clk);
    tot = 0;
    for (int a = 0; a < N; a++) begin d[a] = dut.u_bw.snap[a]; tot += d[a]; end
    while (!dut.bw_done) @(negedge clk);
    @(negedge clk);
    minb = TOTAL_BW; maxnb = 0;
    for (int a = 0; a < N; a++) begin
      longint unsigned e;
      e = (tot == 0) ? MIN_BW + (TOTAL_BW - N * MIN_BW) / N
                     : MIN_BW + d[a] * (TOTAL_BW - N * MIN_BW) / tot;
      want(bw_mbps[a] == BW_W'(e), $sformatf("w%0d app %0d bw %0d expected %0d", w + 1, a, bw_mbps[a], e));
      if (cls[a].b) minb = (bw_mbps[a] < minb) ? bw_mbps[a] : minb;
      else          maxnb = (bw_mbps[a] > maxnb) ? bw_mbps[a] : maxnb;
    end
    want(minb > maxnb, $sformatf("w%0d bandwidth-bound programs get more bandwidth (%0d vs %0d)", w + 1, minb, maxnb));
    // Second decision, under the new allocation.
    while (!dut.pf_decide) @(negedge clk);
    @(negedge clk);
    want(pf_enable == exp_pf, $sformatf("w%0d second prefetch decision", w + 1));
    $display("w%0d done at cycle %0d", w + 1, cyc);
  endtask

  initial begin
    for (int a = 0; a < N; a++) begin
      cls[a] = '0; ptr[a] = 0; miss_valid[a] = 0; mem_ready[a] = 1; mem_resp[a] = 0;
      llc_valid[a] = 0; llc_line[a] = '0; inst_ret[a] = '0;
    end
    for (int w = 0; w < 14; w++) run_mix(w);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
