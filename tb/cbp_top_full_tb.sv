// cbp_top_full_tb: end-to-end test of the CBP resource manager with every parameter at its default (16 applications, 8 MB in 256 units, 10 ms interval).
//
// Plays 16 applications around the manager: each one sends LLC accesses to
// its ATD with its own reuse pattern, retires instructions at a rate that
// depends on whether its prefetcher is on, and sends LLC misses through its
// bandwidth throttle to a fixed-latency memory. The applications are made
// so that the right decisions are known:
//   app 0  reuses a working set that needs a few more cache units, and runs
//          twice as fast with prefetching          -> more cache, prefetch on
//   app 1  streams (no reuse), issues many misses and is slowed down by
//          prefetching                               -> more bandwidth, off
//   app 2  tiny working set, indifferent to prefetching -> prefetch off
//   app 3  runs 1.5x faster with prefetching         -> prefetch on
//   other apps (full size only) behave like app 2.
// After each reconfiguration the cache allocation is compared with a
// Lookahead computed here from the ATD counters the allocator saw, the
// bandwidth allocation with the proportional formula on the delay snapshot,
// and the prefetch settings with the expected pattern. The throttle's
// request spacing is checked against the allocation. Every mechanism
// (sampling windows, prefetch decision, cache step, ATD halving, bandwidth
// step, throttle stall, ATD hit) must occur at least once.
module cbp_top_full_tb;
  localparam int unsigned N        = 16;
  localparam int unsigned UNITS    = 256;
  localparam int unsigned MINU     = 4;
  localparam int unsigned TOTAL_BW = 64000;
  localparam int unsigned MIN_BW   = 1000;
  localparam int unsigned SAMPLE   = 500;
  localparam int unsigned RECONF   = 10000;
  localparam int unsigned SET_BITS = 9;
  localparam int unsigned SLOG2    = 4;
  localparam int unsigned LINE_W   = 42;
  localparam int unsigned TICK_DIV = 1;
  localparam int unsigned N_RECONF = 1;
  localparam int unsigned MEM_LAT  = 40;
  localparam int unsigned AW       = $clog2(UNITS + 1);
  localparam int unsigned BW_W     = $clog2(TOTAL_BW + 1);
  localparam int unsigned COST     = cbp_pkg::LINE_BYTES * cbp_pkg::CLK_MHZ;

  logic clk = 0, rst_n = 0, tick = 0;
  logic [N-1:0]      llc_valid, miss_valid, miss_ready, mem_valid, mem_ready, mem_resp;
  logic [LINE_W-1:0] llc_line [N];
  logic [2:0]        inst_ret [N];
  logic [AW-1:0]     cache_units [N];
  logic [BW_W-1:0]   bw_mbps [N];
  logic [N-1:0]      pf_enable;
  cbp_pkg::phase_e   phase;

  cbp_top  dut (.*);

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic want(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- traffic
  int unsigned cyc = 0;
  int unsigned ptr [N];
  int unsigned ws  [N];          // working-set lines per sampled set
  int unsigned fresh = 0;
  always @(negedge clk) begin
    cyc++;
    tick <= rst_n && (cyc % TICK_DIV == 0);
  end

  // LLC accesses: app a walks its working set cyclically over the sampled
  // sets, so every reuse hits at stack depth ws-1; app 1 never reuses.
  always @(negedge clk) begin
    for (int a = 0; a < N; a++) begin
      int unsigned set, tagv;
      llc_valid[a] = rst_n;
      set  = ((ptr[a] / ws[a]) % (1 << (SET_BITS - SLOG2))) << SLOG2;
      tagv = (a == 1) ? 1000 + fresh : 16 + a * 64 + (ptr[a] % ws[a]);
      if (a == 1) fresh++;
      llc_line[a] = LINE_W'({tagv, SET_BITS'(set)});
      ptr[a]++;
    end
  end

  // Instructions: per-cycle rate with prefetch on / off.
  function automatic int unsigned ipc(int a, logic pf);
    case (a)
      0: return pf ? 4 : 2;
      1: return pf ? 2 : 3;
      3: return pf ? 3 : 2;
      default: return 2;
    endcase
  endfunction
  always @(negedge clk) for (int a = 0; a < N; a++) inst_ret[a] = 3'(ipc(a, pf_enable[a]));

  // Misses: app 1 always has one waiting, the others one in 32 cycles.
  // Memory accepts at once and answers MEM_LAT cycles later.
  int unsigned due [N][$];
  always @(negedge clk) begin
    for (int a = 0; a < N; a++) begin
      if (!rst_n) miss_valid[a] = 0;
      else if (!miss_valid[a]) miss_valid[a] = (a == 1) || ($urandom_range(31) == 0);
      mem_ready[a] = 1;
      mem_resp[a]  = (due[a].size() != 0 && due[a][0] == cyc);
    end
  end
  always @(posedge clk) begin
    for (int a = 0; a < N; a++) begin
      if (mem_resp[a]) void'(due[a].pop_front());
      if (mem_valid[a] && mem_ready[a]) due[a].push_back(cyc + MEM_LAT);
      if (miss_valid[a] && miss_ready[a]) miss_valid[a] <= 0;
    end
  end

  // ------------------------------------------------------------ mechanisms
  int unsigned n_on = 0, n_off = 0, n_decide = 0, n_cache = 0, n_halve = 0, n_bw = 0;
  int unsigned n_stall = 0, n_hit = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.pf_clear && dut.count_on) n_on++;
    if (dut.count_off && tick && dut.u_seq.sample_t == 0) n_off++;
    if (dut.pf_decide) n_decide++;
    if (dut.cache_done) n_cache++;
    if (dut.atd_halve) n_halve++;
    if (dut.bw_done) n_bw++;
    for (int a = 0; a < N; a++) if (miss_valid[a] && !miss_ready[a]) n_stall++;
    if (dut.hits[0][ws[0] - 1] != 0) n_hit++;
  end

  // Reference Lookahead on the counters the allocator reads.
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

  // Request spacing of app 1 under its current allocation.
  int unsigned last_fire = 0, gap_bad = 0, gap_checked = 0;
  always @(posedge clk) if (rst_n && phase == cbp_pkg::PH_RUN && mem_valid[1] && mem_ready[1]) begin
    if (last_fire != 0 && cyc - last_fire < 400) begin
      gap_checked++;
      if (cyc - last_fire < COST / bw_mbps[1]) gap_bad++;
    end
    last_fire = cyc;
  end

  initial begin
    longint unsigned h [N][UNITS];
    longint unsigned d [N], tot;
    int unsigned exp_c [N], sum_c, sum_b;
    logic [N-1:0] exp_pf;
    for (int a = 0; a < N; a++) begin
      ptr[a] = 0;
      ws[a]  = (a == 0) ? 6 : (a == 3) ? UNITS + 4 : 2;
      miss_valid[a] = 0; mem_ready[a] = 1; mem_resp[a] = 0; llc_valid[a] = 0;
      llc_line[a] = '0; inst_ret[a] = '0;
    end
    exp_pf = '0;
    exp_pf[0] = 1;
    exp_pf[3] = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // Step 0: equal split.
    for (int a = 0; a < N; a++) begin
      want(cache_units[a] == AW'(UNITS / N), "equal cache split after reset");
      want(bw_mbps[a] == BW_W'(TOTAL_BW / N), "equal bandwidth split after reset");
    end
    for (int r = 0; r < N_RECONF; r++) begin
      // Prefetch decision of this interval.
      while (!dut.pf_decide) @(negedge clk);
      @(negedge clk);
      want(pf_enable == exp_pf, $sformatf("prefetch settings %b expected %b", pf_enable, exp_pf));
      // Reconfiguration: cache step.
      while (!dut.cache_start) @(negedge clk);
      @(negedge clk);
      for (int a = 0; a < N; a++) for (int p = 0; p < UNITS; p++) h[a][p] = dut.hits[a][p];
      lookahead(h, exp_c);
      while (!dut.cache_done) @(negedge clk);
      @(negedge clk);
      sum_c = 0;
      for (int a = 0; a < N; a++) begin
        sum_c += cache_units[a];
        want(cache_units[a] == AW'(exp_c[a]),
             $sformatf("app %0d cache %0d expected %0d", a, cache_units[a], exp_c[a]));
        want(cache_units[a] >= MINU, "min_ways respected");
      end
      want(sum_c == UNITS, "all cache units allocated");
      want(cache_units[0] > cache_units[1], "reusing app gets more cache than streaming app");
      // ATD halving and the bandwidth snapshot happen on the same edge.
      while (!dut.atd_halve) @(negedge clk);
      @(negedge clk);
      want(dut.hits[0][ws[0] - 1] - h[0][ws[0] - 1] / 2 <= 1, "ATD counters halved after reconfiguration");
      // Bandwidth step, against the delays it captured.
      tot = 0;
      for (int a = 0; a < N; a++) begin d[a] = dut.u_bw.snap[a]; tot += d[a]; end
      while (!dut.bw_done) @(negedge clk);
      @(negedge clk);
      sum_b = 0;
      for (int a = 0; a < N; a++) begin
        longint unsigned e;
        e = (tot == 0) ? MIN_BW + (TOTAL_BW - N * MIN_BW) / N
                       : MIN_BW + d[a] * (TOTAL_BW - N * MIN_BW) / tot;
        sum_b += bw_mbps[a];
        want(bw_mbps[a] == BW_W'(e), $sformatf("app %0d bw %0d expected %0d", a, bw_mbps[a], e));
      end
      want(sum_b <= TOTAL_BW, "bandwidth not over-allocated");
      want(bw_mbps[1] > bw_mbps[0], "app with longest queuing gets most bandwidth");
      want(phase == cbp_pkg::PH_SAMPLE_ON && pf_enable == '1, "next interval starts sampling with prefetch on");
    end
    want(n_on >= N_RECONF && n_off >= N_RECONF, $sformatf("sampling windows on %0d off %0d", n_on, n_off));
    want(n_decide >= N_RECONF, "prefetch decisions happened");
    want(n_cache == N_RECONF && n_bw == N_RECONF && n_halve == N_RECONF, "reconfigurations happened");
    want(n_stall > 0, "throttle stalled requests");
    want(n_hit > 0, "ATD recorded hits");
    want(gap_checked > 0 && gap_bad == 0, $sformatf("request spacing respected (%0d gaps, %0d short)", gap_checked, gap_bad));
    $display("mechanisms: on=%0d off=%0d decide=%0d cache=%0d halve=%0d bw=%0d stall=%0d hit=%0d gaps=%0d",
             n_on, n_off, n_decide, n_cache, n_halve, n_bw, n_stall, n_hit, gap_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
