// atd: sampled auxiliary tag directory (utility monitor) of one application.
//
// The ATD watches the application's last-level-cache accesses as if the
// application owned the whole cache, and counts, for every LRU stack
// position p, how many accesses hit at position p. hit_cnt[0..k-1] summed is
// then the number of hits the application would get with k allocation
// units, which is what the Lookahead cache allocator needs. The counters are
// halved on `halve` (once per reconfiguration), so recent behaviour weighs
// more than old behaviour.
//
// How it works: only one set in 2**SAMPLE_LOG2 is modelled (set sampling).
// A sampled set holds WAYS partial tags kept in recency order (position 0
// is the most recently used). An access reads the row, finds the matching
// position, moves the tag to the front and writes the row back in the same
// cycle; a miss inserts at the front and drops the LRU tag. The modelled
// cache has WAYS = 256 ways so one stack position equals one 32 KB
// allocation unit of the 8 MB LLC.
//
// Interface: acc_valid/acc_line are one access (a 64 B line address) per
// cycle, accepted unconditionally. hold freezes the counters (tags still
// update) while the allocator reads them. halve divides every counter by
// two; a hit in the same cycle is added after halving.
// Timing: a hit is visible in hit_cnt the cycle after the access.
//
// Follows the paper: sampled ATDs giving hits per allocation size, and
// halving after each reconfiguration. This design's own choices: number of
// sampled sets (32, as in the utility-based partitioning work the paper
// builds on), 16-bit XOR-folded partial tags, the modelled 512-set,
// 256-way geometry, counter width, and the hold input.
module atd #(
  parameter int unsigned WAYS        = 256,  // stack positions = allocation units
  parameter int unsigned SET_BITS    = 9,    // sets of the modelled cache (512)
  parameter int unsigned SAMPLE_LOG2 = 4,    // model one set in 16 -> 32 sets
  parameter int unsigned LINE_W      = 42,   // line address width (48-bit PA)
  parameter int unsigned TAG_W       = 16,   // partial tag width
  parameter int unsigned CNT_W       = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    acc_valid,
  input  logic [LINE_W-1:0]       acc_line,
  input  logic                    hold,
  input  logic                    halve,
  output logic [CNT_W-1:0]        hit_cnt [WAYS],
  output logic [CNT_W-1:0]        miss_cnt
);
  localparam int unsigned SETS  = 1 << (SET_BITS - SAMPLE_LOG2);
  localparam int unsigned IDX_W = SET_BITS - SAMPLE_LOG2;
  localparam int unsigned POS_W = $clog2(WAYS);
  localparam int unsigned UPPER = LINE_W - SET_BITS;

  logic [WAYS-1:0][TAG_W-1:0] tags [SETS];
  logic [WAYS-1:0]            vld  [SETS];

  // XOR-fold the bits above the set index into a partial tag.
  function automatic logic [TAG_W-1:0] fold(input logic [UPPER-1:0] up);
    logic [TAG_W-1:0] t;
    t = '0;
    for (int unsigned b = 0; b < UPPER; b++) t[b % TAG_W] ^= up[b];
    return t;
  endfunction

  logic              sampled;
  logic [IDX_W-1:0]  idx;
  logic [TAG_W-1:0]  tag;
  logic [WAYS-1:0][TAG_W-1:0] row_t, new_t;
  logic [WAYS-1:0]   row_v, new_v;
  logic              hit;
  logic [POS_W-1:0]  hit_pos;

  always_comb begin
    sampled = acc_valid && (acc_line[SAMPLE_LOG2-1:0] == '0);
    idx     = acc_line[SET_BITS-1:SAMPLE_LOG2];
    tag     = fold(acc_line[LINE_W-1:SET_BITS]);
    row_t   = tags[idx];
    row_v   = vld[idx];
    hit     = 1'b0;
    hit_pos = POS_W'(WAYS - 1);
    for (int p = WAYS - 1; p >= 0; p--) begin
      if (row_v[p] && row_t[p] == tag) begin
        hit     = 1'b1;
        hit_pos = POS_W'(p);
      end
    end
    // Move to front: positions up to hit_pos shift down by one.
    new_t    = row_t;
    new_v    = row_v;
    new_t[0] = tag;
    new_v[0] = 1'b1;
    for (int p = 1; p < WAYS; p++) begin
      if (POS_W'(p) <= hit_pos) begin
        new_t[p] = row_t[p-1];
        new_v[p] = row_v[p-1];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (sampled) tags[idx] <= new_t;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) vld[s] <= '0;
    end else if (sampled) begin
      vld[idx] <= new_v;
    end
  end

  // Counters: halve first, then add this cycle's event, saturating.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < WAYS; p++) hit_cnt[p] <= '0;
      miss_cnt <= '0;
    end else begin
      for (int p = 0; p < WAYS; p++) begin
        logic [CNT_W-1:0] c;
        c = halve ? (hit_cnt[p] >> 1) : hit_cnt[p];
        if (sampled && hit && !hold && hit_pos == POS_W'(p) && c != '1) c = c + 1'b1;
        hit_cnt[p] <= c;
      end
      begin
        logic [CNT_W-1:0] m;
        m = halve ? (miss_cnt >> 1) : miss_cnt;
        if (sampled && !hit && !hold && m != '1) m = m + 1'b1;
        miss_cnt <= m;
      end
    end
  end

endmodule
