// pf_throttle_tb: self-checking test of the prefetch throttling controller.
//
// Feeds per-core retired-instruction counts through an "on" and an "off"
// window and checks the per-core decision against
// on * 100 > off * 105 computed here, with boundary cases exactly at the
// 1.05 threshold and random runs. Also checks that clear zeroes the
// counters and that the setting holds between decisions.
module pf_throttle_tb;
  localparam int unsigned N = 4, IW = 3, CNT_W = 24;
  logic clk = 0, rst_n = 0;
  logic [IW-1:0] inst_ret [N];
  logic clear = 0, count_on = 0, count_off = 0, decide = 0;
  logic [N-1:0] pf_en;
  logic [CNT_W-1:0] on_cnt [N];
  logic [CNT_W-1:0] off_cnt [N];
  int checks = 0, failures = 0;
  int unsigned m_on [N], m_off [N];

  pf_throttle #(.N_APPS(N), .IW(IW), .CNT_W(CNT_W), .THRESH_NUM(105), .THRESH_DEN(100)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Drive a window of `len` cycles; rate_x[i] gives core i's per-cycle count pattern.
  task automatic window(input logic on, input int unsigned len, input int unsigned total [N]);
    int unsigned left [N];
    left = total;
    count_on = on; count_off = !on;
    for (int c = 0; c < len; c++) begin
      for (int i = 0; i < N; i++) begin
        int unsigned v;
        v = (left[i] > 4) ? 4 : left[i];
        if (c == len - 1) v = left[i];   // caller keeps totals <= 4*len
        inst_ret[i] = IW'(v);
        left[i] -= v;
        if (on) m_on[i] += v; else m_off[i] += v;
      end
      @(negedge clk);
    end
    count_on = 0; count_off = 0;
    foreach (inst_ret[i]) inst_ret[i] = '0;
  endtask

  task automatic decide_and_check(string what);
    decide = 1;
    @(negedge clk) decide = 0;
    for (int i = 0; i < N; i++) begin
      logic exp;
      exp = (longint'(m_on[i]) * 100) > (longint'(m_off[i]) * 105);
      checks++;
      if (pf_en[i] != exp) begin
        failures++;
        $display("FAIL %s: core %0d on %0d off %0d en %0d", what, i, m_on[i], m_off[i], pf_en[i]);
      end
    end
  endtask

  task automatic do_clear();
    clear = 1;
    @(negedge clk) clear = 0;
    foreach (m_on[i]) begin m_on[i] = 0; m_off[i] = 0; end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (on_cnt[i] != 0 || off_cnt[i] != 0) begin failures++; $display("FAIL clear %0d", i); end
    end
  endtask

  initial begin
    int unsigned on_t [N], off_t [N];
    foreach (inst_ret[i]) inst_ret[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++;
    if (pf_en != '1) begin failures++; $display("FAIL reset %b", pf_en); end
    // Boundaries: 1050/1000 is exactly 1.05 (off), 1051/1000 is above (on),
    // 900/1000 slows down (off), 2000/1000 speeds up (on).
    do_clear();
    on_t  = '{1050, 1051, 900, 2000};
    off_t = '{1000, 1000, 1000, 1000};
    window(1, 600, on_t);
    window(0, 600, off_t);
    decide_and_check("boundary");
    checks++;
    if (pf_en != 4'b1010) begin failures++; $display("FAIL boundary pattern %b", pf_en); end
    // Setting holds without a decide.
    repeat (10) @(negedge clk);
    checks++;
    if (pf_en != 4'b1010) begin failures++; $display("FAIL hold %b", pf_en); end
    for (int t = 0; t < 100; t++) begin
      do_clear();
      foreach (on_t[i]) begin on_t[i] = $urandom_range(2000); off_t[i] = $urandom_range(2000); end
      window(1, 500, on_t);
      window(0, 500, off_t);
      decide_and_check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
