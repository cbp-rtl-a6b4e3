// cbp_pkg: constants and types shared by the CBP resource manager.
//
// The defaults describe the 16-core tiled CMP the design targets: 16
// applications (one per core), an 8 MB last-level cache made of sixteen
// 512 KB, 16-way banks, partitioned at 32 KB granularity (256 allocation
// units, one unit being one way of one bank), four memory channels of
// 16 GB/s each (64 GB/s in all), and the controller constants
// min_ways = 4, min_bandwidth_allocation = 1 GB/s, speedup_threshold = 1.05,
// prefetch_sampling_period = 0.5 ms and reconfiguration_interval = 10 ms.
// Time is counted in ticks of an external 1 us time base; bandwidth is
// counted in MB/s. Both units are this design's choice.
package cbp_pkg;

  // Number of co-scheduled applications (one per core).
  localparam int unsigned N_APPS          = 16;
  // Cache allocation units (32 KB each): 16 banks x 16 ways.
  localparam int unsigned TOTAL_UNITS     = 256;
  localparam int unsigned MIN_UNITS       = 4;      // min_ways
  // Bandwidth, in MB/s.
  localparam int unsigned TOTAL_BW_MBPS   = 64000;  // 4 channels x 16 GB/s
  localparam int unsigned MIN_BW_MBPS     = 1000;   // min_bandwidth_allocation
  // Timeline, in 1 us ticks.
  localparam int unsigned SAMPLE_TICKS    = 500;    // prefetch_sampling_period
  localparam int unsigned RECONF_TICKS    = 10000;  // reconfiguration_interval
  localparam int unsigned PREF_INT_TICKS  = 10000;  // prefetch_interval
  // speedup_threshold = THRESH_NUM / THRESH_DEN.
  localparam int unsigned THRESH_NUM      = 105;
  localparam int unsigned THRESH_DEN      = 100;
  // Memory request cost for the bandwidth throttle.
  localparam int unsigned CLK_MHZ         = 4000;   // 4 GHz core clock
  localparam int unsigned LINE_BYTES      = 64;

  // Phases of the coordination timeline.
  typedef enum logic [2:0] {
    PH_IDLE,        // after reset, before the first tick
    PH_SAMPLE_ON,   // all prefetchers on, instructions counted
    PH_SAMPLE_OFF,  // all prefetchers off, instructions counted
    PH_RUN,         // per-application prefetch setting applied
    PH_CACHE,       // Lookahead cache allocation running
    PH_BW           // bandwidth allocation running
  } phase_e;

endpackage
