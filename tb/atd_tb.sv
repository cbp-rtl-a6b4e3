// atd_tb: self-checking test of the sampled ATD.
//
// Drives random line addresses drawn from a small pool (so tags are reused
// at many LRU depths) and keeps its own LRU stack per sampled set as a
// queue. After every access it compares all hit counters and the miss
// counter with the model. It also checks that unsampled sets are ignored,
// that hold freezes the counters and that halve divides them by two.
module atd_tb;
  localparam int unsigned WAYS = 8, SET_BITS = 4, SAMPLE_LOG2 = 1, LINE_W = 20;
  localparam int unsigned TAG_W = 16, CNT_W = 16;
  localparam int unsigned SETS = 1 << (SET_BITS - SAMPLE_LOG2);

  logic clk = 0, rst_n = 0;
  logic acc_valid = 0, hold = 0, halve = 0;
  logic [LINE_W-1:0] acc_line = '0;
  logic [CNT_W-1:0] hit_cnt [WAYS];
  logic [CNT_W-1:0] miss_cnt;

  int checks = 0, failures = 0;
  int unsigned exp_hits [WAYS];
  int unsigned exp_miss;
  int unsigned stack [SETS][$];

  atd #(.WAYS(WAYS), .SET_BITS(SET_BITS), .SAMPLE_LOG2(SAMPLE_LOG2),
        .LINE_W(LINE_W), .TAG_W(TAG_W), .CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    checks++;
    if (miss_cnt != CNT_W'(exp_miss)) begin
      failures++;
      $display("FAIL %s: miss_cnt %0d expected %0d", what, miss_cnt, exp_miss);
    end
    for (int p = 0; p < WAYS; p++) begin
      checks++;
      if (hit_cnt[p] != CNT_W'(exp_hits[p])) begin
        failures++;
        $display("FAIL %s: hit_cnt[%0d] %0d expected %0d", what, p, hit_cnt[p], exp_hits[p]);
      end
    end
  endtask

  // One access; the model updates its stacks.
  task automatic access(input int unsigned upper, input int unsigned set);
    int unsigned s, pos;
    logic sampled;
    acc_line  = {16'(upper), 4'(set)};
    acc_valid = 1;
    @(posedge clk);
    #1 acc_valid = 0;
    sampled = (set % (1 << SAMPLE_LOG2)) == 0;
    if (sampled) begin
      s   = set >> SAMPLE_LOG2;
      pos = WAYS;
      foreach (stack[s][i]) if (stack[s][i] == upper && pos == WAYS) pos = i;
      if (pos < WAYS) begin
        if (!hold) exp_hits[pos]++;
        stack[s].delete(pos);
      end else begin
        if (!hold) exp_miss++;
        if (stack[s].size() == WAYS) void'(stack[s].pop_back());
      end
      stack[s].push_front(upper);
    end
    compare("access");
  endtask

  initial begin
    foreach (exp_hits[p]) exp_hits[p] = 0;
    exp_miss = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    compare("reset");
    // Random traffic over 12 tags and all 16 sets.
    for (int n = 0; n < 3000; n++) access($urandom_range(11) + 16'h100, $urandom_range(15));
    // Deterministic depth check on set 0: tags A..D then A hits at depth 3.
    for (int t = 0; t < 4; t++) access(16'h900 + t, 0);
    access(16'h900, 0);
    checks++;
    if (stack[0][0] != 16'h900) failures++;
    // hold: tags move, counters do not.
    hold = 1;
    for (int n = 0; n < 50; n++) access($urandom_range(11) + 16'h100, $urandom_range(15));
    hold = 0;
    // halve
    halve = 1;
    @(posedge clk);
    #1 halve = 0;
    foreach (exp_hits[p]) exp_hits[p] = exp_hits[p] / 2;
    exp_miss = exp_miss / 2;
    compare("halve");
    for (int n = 0; n < 500; n++) access($urandom_range(11) + 16'h100, $urandom_range(15));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
