// cbp_sequencer_tb: self-checking test of the coordination timeline.
//
// Runs the sequencer with short intervals (3-tick sampling windows,
// 20-tick reconfiguration interval, a tick every 4 cycles) and plays the
// cache and bandwidth allocators, answering start with done after a
// delay. Checks, per reconfiguration: that the cache step starts exactly
// every RECONF ticks, that the order is cache -> (halve ATD, roll delays,
// start bandwidth) -> bandwidth done -> clear -> sampling on -> sampling off
// -> decide, that each sampling window spans SAMPLE ticks, that the ATDs are
// held exactly while the cache step runs. A second instance with a
// prefetch interval shorter than the reconfiguration interval must resample
// in between.
module cbp_sequencer_tb;
  localparam int unsigned SAMPLE = 3, RECONF = 20, PREF = 20, TICK_DIV = 4;
  logic clk = 0, rst_n = 0, tick = 0;
  logic cache_done = 0, bw_done = 0;
  cbp_pkg::phase_e phase;
  logic cache_start, atd_hold, atd_halve, bw_start, qd_roll;
  logic pf_clear, count_on, count_off, pf_decide;
  int checks = 0, failures = 0;

  cbp_sequencer #(.SAMPLE_TICKS(SAMPLE), .RECONF_TICKS(RECONF), .PREF_INT_TICKS(PREF)) dut (.*);

  // Second instance: prefetch interval 8 ticks inside a 40-tick interval.
  cbp_pkg::phase_e phase2;
  logic cs2, ah2, hv2, bs2, qr2, pc2, co2, cf2, pd2;
  logic cd2 = 0, bd2 = 0;
  cbp_sequencer #(.SAMPLE_TICKS(2), .RECONF_TICKS(40), .PREF_INT_TICKS(8)) dut2 (
    .clk, .rst_n, .tick, .cache_done(cd2), .bw_done(bd2), .phase(phase2),
    .cache_start(cs2), .atd_hold(ah2), .atd_halve(hv2), .bw_start(bs2), .qd_roll(qr2),
    .pf_clear(pc2), .count_on(co2), .count_off(cf2), .pf_decide(pd2));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned cyc = 0, ticks = 0;
  always @(negedge clk) begin
    cyc++;
    tick <= rst_n && (cyc % TICK_DIV == 0);
  end
  always @(posedge clk) if (tick) ticks <= ticks + 1;

  // Allocator stand-ins: done 7 (cache) and 5 (bandwidth) cycles after start.
  initial forever begin
    @(posedge clk);
    if (cache_start) begin
      repeat (6) @(posedge clk);
      cache_done <= 1; @(posedge clk); cache_done <= 0;
    end
  end
  initial forever begin
    @(posedge clk);
    if (bw_start) begin
      repeat (4) @(posedge clk);
      bw_done <= 1; @(posedge clk); bw_done <= 0;
    end
  end
  always @(posedge clk) begin
    cd2 <= cs2;
    bd2 <= bs2;
  end

  task automatic want(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at tick %0d", what, ticks); end
  endtask

  // Ticks seen while each sampling window was open.
  int unsigned on_ticks = 0, off_ticks = 0;
  always @(posedge clk) begin
    if (pf_decide) begin
      on_ticks  <= 0;
      off_ticks <= 0;
    end else begin
      if (tick && count_on)  on_ticks  <= on_ticks + 1;
      if (tick && count_off) off_ticks <= off_ticks + 1;
    end
  end

  int unsigned reconfs = 0, decides2 = 0, reconfs2 = 0;
  always @(posedge clk) if (rst_n) begin
    if (pd2) decides2++;
    if (cs2) reconfs2++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Step 0 -> first sampling.
    while (!pf_clear) @(negedge clk);
    @(negedge clk);
    want(count_on && !count_off, "sampling starts with prefetch on");
    for (int r = 0; r < 4; r++) begin
      while (count_on) @(negedge clk);
      want(count_off, "off window follows on window");
      while (count_off) @(negedge clk);
      want(pf_decide, "decide right after the off window");
      want(on_ticks == SAMPLE, $sformatf("on window length %0d", on_ticks));
      want(off_ticks == SAMPLE, $sformatf("off window length %0d", off_ticks));
      // Run until the cache step starts.
      while (!cache_start) begin
        @(negedge clk);
        if (!cache_start) want(!atd_hold && !bw_start, "quiet run phase");
      end
      reconfs++;
      want(ticks == reconfs * RECONF, "reconfiguration spacing");
      @(negedge clk);
      while (!cache_done) begin
        want(atd_hold && phase == cbp_pkg::PH_CACHE, "ATD held during cache step");
        @(negedge clk);
      end
      @(negedge clk);
      want(atd_halve && bw_start && qd_roll, "halve, roll, bandwidth after cache");
      want(!atd_hold, "hold released");
      while (!bw_done) begin
        want(phase == cbp_pkg::PH_BW && !pf_clear, "bandwidth step");
        @(negedge clk);
      end
      @(negedge clk);
      want(pf_clear, "clear after bandwidth step");
      @(negedge clk);
      want(count_on, "new interval samples with prefetch on");
    end
    want(decides2 > 2 * reconfs2, "shorter prefetch interval resamples");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
