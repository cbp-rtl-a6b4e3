// cbp_top: CBP resource manager for N_APPS co-scheduled applications.
//
// CBP jointly manages three shared-memory-system knobs of a tiled multicore:
// how much of the last-level cache each application owns, how much off-chip
// bandwidth it may use, and whether its hardware prefetcher runs. One local
// controller per knob makes the decision, and a sequencer runs them in a
// fixed order each reconfiguration interval so that every controller sees
// the effect of the others' last decisions:
//   cache_alloc  (Lookahead on the per-application ATD hit curves)
//   bw_alloc     (bandwidth in proportion to measured queuing delay)
//   pf_throttle  (prefetcher on only if it speeds the application up >5%)
// Per application this block also holds the monitors and the enforcement
// that are in the memory path: an ATD fed with the application's LLC
// accesses, a queuing-delay monitor and a bandwidth throttle on its
// LLC-miss path to memory.
//
// Interface (all per application, index = core):
//   llc_valid/llc_line   LLC accesses, observed by the ATD
//   inst_ret             instructions retired this cycle (for IPC sampling)
//   miss_valid/ready     LLC misses entering the bandwidth throttle
//   mem_valid/ready      the same requests leaving it towards memory
//   mem_resp             a response for this application arrived
//   cache_units          cache allocation in 32 KB units, to the cache
//                        partition enforcement (bank tables and way masks,
//                        outside this block)
//   bw_mbps              bandwidth allocation in MB/s (also applied here)
//   pf_enable            prefetcher enable per core
//   tick                 1 us time base; phase shows the timeline step.
// Timing: allocations change only at the end of the cache and bandwidth
// steps of a reconfiguration; pf_enable is forced on, then off, during the
// two sampling windows and otherwise follows the last decision.
//
// Follows the paper: controller algorithms, order and timeline. This
// design's choices: units, widths, the tick time base, the handshakes.
module cbp_top
#(
  parameter int unsigned N_APPS         = cbp_pkg::N_APPS,
  parameter int unsigned UNITS          = cbp_pkg::TOTAL_UNITS,
  parameter int unsigned MIN_UNITS      = cbp_pkg::MIN_UNITS,
  parameter int unsigned TOTAL_BW       = cbp_pkg::TOTAL_BW_MBPS,
  parameter int unsigned MIN_BW         = cbp_pkg::MIN_BW_MBPS,
  parameter int unsigned SAMPLE_TICKS   = cbp_pkg::SAMPLE_TICKS,
  parameter int unsigned RECONF_TICKS   = cbp_pkg::RECONF_TICKS,
  parameter int unsigned PREF_INT_TICKS = cbp_pkg::PREF_INT_TICKS,
  parameter int unsigned SET_BITS       = 9,
  parameter int unsigned SAMPLE_LOG2    = 4,
  parameter int unsigned LINE_W         = 42,
  parameter int unsigned IW             = 3,
  parameter int unsigned CNT_W          = 32,
  parameter int unsigned D_W            = 48,
  localparam int unsigned AW            = $clog2(UNITS + 1),
  localparam int unsigned BW_W          = $clog2(TOTAL_BW + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              tick,
  input  logic [N_APPS-1:0] llc_valid,
  input  logic [LINE_W-1:0] llc_line   [N_APPS],
  input  logic [IW-1:0]     inst_ret   [N_APPS],
  input  logic [N_APPS-1:0] miss_valid,
  output logic [N_APPS-1:0] miss_ready,
  output logic [N_APPS-1:0] mem_valid,
  input  logic [N_APPS-1:0] mem_ready,
  input  logic [N_APPS-1:0] mem_resp,
  output logic [AW-1:0]     cache_units [N_APPS],
  output logic [BW_W-1:0]   bw_mbps     [N_APPS],
  output logic [N_APPS-1:0] pf_enable,
  output cbp_pkg::phase_e            phase
);
  logic cache_start, cache_done, cache_busy;
  logic bw_start, bw_done, bw_busy;
  logic atd_hold, atd_halve, qd_roll;
  logic pf_clear, count_on, count_off, pf_decide;
  logic [N_APPS-1:0] pf_en;

  logic [CNT_W-1:0] hits     [N_APPS][UNITS];
  logic [CNT_W-1:0] misses   [N_APPS];
  logic [D_W-1:0]   qdelay   [N_APPS];
  logic [7:0]       inflight [N_APPS];
  logic [CNT_W-1:0] on_cnt   [N_APPS];
  logic [CNT_W-1:0] off_cnt  [N_APPS];

  cbp_sequencer #(
    .SAMPLE_TICKS(SAMPLE_TICKS), .RECONF_TICKS(RECONF_TICKS), .PREF_INT_TICKS(PREF_INT_TICKS)
  ) u_seq (
    .clk, .rst_n, .tick, .cache_done, .bw_done, .phase,
    .cache_start, .atd_hold, .atd_halve, .bw_start, .qd_roll,
    .pf_clear, .count_on, .count_off, .pf_decide
  );

  for (genvar g = 0; g < N_APPS; g++) begin : g_app
    atd #(
      .WAYS(UNITS), .SET_BITS(SET_BITS), .SAMPLE_LOG2(SAMPLE_LOG2),
      .LINE_W(LINE_W), .CNT_W(CNT_W)
    ) u_atd (
      .clk, .rst_n,
      .acc_valid(llc_valid[g]), .acc_line(llc_line[g]),
      .hold(atd_hold), .halve(atd_halve),
      .hit_cnt(hits[g]), .miss_cnt(misses[g])
    );

    qdelay_mon #(.D_W(D_W)) u_qd (
      .clk, .rst_n,
      .waiting(miss_valid[g] && !miss_ready[g]),
      .issue(mem_valid[g] && mem_ready[g]),
      .resp(mem_resp[g]),
      .roll(qd_roll),
      .qdelay(qdelay[g]), .outstanding(inflight[g])
    );

    mba_throttle #(.CLK_MHZ(cbp_pkg::CLK_MHZ), .LINE_BYTES(cbp_pkg::LINE_BYTES), .BW_W(BW_W)) u_mba (
      .clk, .rst_n, .bw_mbps(bw_mbps[g]),
      .in_valid(miss_valid[g]), .in_ready(miss_ready[g]),
      .out_valid(mem_valid[g]), .out_ready(mem_ready[g])
    );
  end

  cache_alloc #(.N_APPS(N_APPS), .UNITS(UNITS), .MIN_UNITS(MIN_UNITS), .CNT_W(CNT_W)) u_cache (
    .clk, .rst_n, .start(cache_start), .hits, .alloc(cache_units),
    .done(cache_done), .busy(cache_busy)
  );

  bw_alloc #(.N_APPS(N_APPS), .TOTAL_BW(TOTAL_BW), .MIN_BW(MIN_BW), .D_W(D_W)) u_bw (
    .clk, .rst_n, .start(bw_start), .qdelay, .bw(bw_mbps),
    .done(bw_done), .busy(bw_busy)
  );

  pf_throttle #(.N_APPS(N_APPS), .IW(IW), .CNT_W(CNT_W),
                .THRESH_NUM(cbp_pkg::THRESH_NUM), .THRESH_DEN(cbp_pkg::THRESH_DEN)) u_pf (
    .clk, .rst_n, .inst_ret, .clear(pf_clear), .count_on, .count_off,
    .decide(pf_decide), .pf_en, .on_cnt, .off_cnt
  );

  assign pf_enable = count_on  ? '1 :
                     count_off ? '0 : pf_en;

  // Each allocator runs only inside its own step of the timeline.
  a_cache_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    cache_busy |-> phase == cbp_pkg::PH_CACHE);
  a_bw_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    bw_busy |-> phase == cbp_pkg::PH_BW);

endmodule
