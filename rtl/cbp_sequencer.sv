// cbp_sequencer: coordination timeline of the CBP resource manager.
//
// Orders the three controllers: cache allocation first, bandwidth
// allocation second (so it sees the effect of the cache decision), and the
// prefetch decision last (so its IPC samples reflect the new cache and
// bandwidth allocation). Each reconfiguration interval runs
//   CACHE -> BW -> SAMPLE_ON -> SAMPLE_OFF -> RUN
// and starts with the cache step once RECONF_TICKS ticks have passed since
// the previous one. Right after reset the cache and bandwidth allocators
// hold their equal split (step 0), so the sequence starts at SAMPLE_ON.
// If PREF_INT_TICKS is shorter than the reconfiguration interval, the two
// sampling windows and the prefetch decision are repeated on their own
// every PREF_INT_TICKS ticks.
//
// Interface: tick is a one-cycle pulse of the 1 us time base; cache_done and
// bw_done come from the allocators. Outputs are one-cycle pulses
// (cache_start, atd_halve, bw_start, qd_roll, pf_clear, pf_decide) and
// levels (atd_hold, count_on, count_off, phase). The ATD counters are held
// while the cache allocator reads them and halved when it is done; the
// queuing-delay window rolls over when the bandwidth allocator takes its
// snapshot.
// Timing: SAMPLE_ON and SAMPLE_OFF each last SAMPLE_TICKS ticks. The
// interval counter restarts when the cache step starts and counts ticks in
// every phase, so reconfigurations are RECONF_TICKS ticks apart.
//
// Follows the paper: the controller priority, the order of the steps,
// sampling on then off for twice the sampling period at the start of each
// interval, and halving the ATDs after reconfiguration. This design's
// choices: the tick time base and the exact pulse timing.
module cbp_sequencer
#(
  parameter int unsigned SAMPLE_TICKS   = cbp_pkg::SAMPLE_TICKS,
  parameter int unsigned RECONF_TICKS   = cbp_pkg::RECONF_TICKS,
  parameter int unsigned PREF_INT_TICKS = cbp_pkg::PREF_INT_TICKS
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   tick,
  input  logic   cache_done,
  input  logic   bw_done,
  output cbp_pkg::phase_e phase,
  output logic   cache_start,
  output logic   atd_hold,
  output logic   atd_halve,
  output logic   bw_start,
  output logic   qd_roll,
  output logic   pf_clear,
  output logic   count_on,
  output logic   count_off,
  output logic   pf_decide
);
  localparam int unsigned TW = $clog2(RECONF_TICKS + PREF_INT_TICKS + 2 * SAMPLE_TICKS + 1);

  logic [TW-1:0] interval_t;   // ticks since the last reconfiguration
  logic [TW-1:0] pref_t;       // ticks since the last sampling start
  logic [TW-1:0] sample_t;     // ticks in the current sampling window

  assign atd_hold  = (phase == cbp_pkg::PH_CACHE);
  assign count_on  = (phase == cbp_pkg::PH_SAMPLE_ON);
  assign count_off = (phase == cbp_pkg::PH_SAMPLE_OFF);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase       <= cbp_pkg::PH_IDLE;
      interval_t  <= '0;
      pref_t      <= '0;
      sample_t    <= '0;
      cache_start <= 1'b0;
      atd_halve   <= 1'b0;
      bw_start    <= 1'b0;
      qd_roll     <= 1'b0;
      pf_clear    <= 1'b0;
      pf_decide   <= 1'b0;
    end else begin
      cache_start <= 1'b0;
      atd_halve   <= 1'b0;
      bw_start    <= 1'b0;
      qd_roll     <= 1'b0;
      pf_clear    <= 1'b0;
      pf_decide   <= 1'b0;
      if (tick) begin
        interval_t <= interval_t + 1'b1;
        pref_t     <= pref_t + 1'b1;
      end
      unique case (phase)
        // Step 0: equal allocation is in place; start the first sampling.
        cbp_pkg::PH_IDLE: begin
          pf_clear <= 1'b1;
          sample_t <= '0;
          phase    <= cbp_pkg::PH_SAMPLE_ON;
        end

        cbp_pkg::PH_SAMPLE_ON: if (tick) begin
          if (sample_t == TW'(SAMPLE_TICKS - 1)) begin
            sample_t <= '0;
            phase    <= cbp_pkg::PH_SAMPLE_OFF;
          end else begin
            sample_t <= sample_t + 1'b1;
          end
        end

        cbp_pkg::PH_SAMPLE_OFF: if (tick) begin
          if (sample_t == TW'(SAMPLE_TICKS - 1)) begin
            sample_t  <= '0;
            pf_decide <= 1'b1;
            phase     <= cbp_pkg::PH_RUN;
          end else begin
            sample_t <= sample_t + 1'b1;
          end
        end

        cbp_pkg::PH_RUN: begin
          if (interval_t >= TW'(RECONF_TICKS)) begin
            interval_t  <= TW'(tick);
            cache_start <= 1'b1;
            phase       <= cbp_pkg::PH_CACHE;
          end else if (pref_t >= TW'(PREF_INT_TICKS)) begin
            pf_clear <= 1'b1;
            pref_t   <= TW'(tick);
            sample_t <= '0;
            phase    <= cbp_pkg::PH_SAMPLE_ON;
          end
        end

        // Cache first; the ATDs are halved once it has read them.
        cbp_pkg::PH_CACHE: if (cache_done) begin
          atd_halve <= 1'b1;
          bw_start  <= 1'b1;
          qd_roll   <= 1'b1;
          phase     <= cbp_pkg::PH_BW;
        end

        // Bandwidth second; then a new interval starts with sampling.
        cbp_pkg::PH_BW: if (bw_done) begin
          pref_t     <= '0;
          sample_t   <= '0;
          pf_clear   <= 1'b1;
          phase      <= cbp_pkg::PH_SAMPLE_ON;
        end

        default: phase <= cbp_pkg::PH_IDLE;
      endcase
    end
  end

endmodule
