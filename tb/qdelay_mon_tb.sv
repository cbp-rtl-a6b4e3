// qdelay_mon_tb: self-checking test of the queuing-delay monitor.
//
// A directed request with a known latency must add exactly that latency,
// plus the cycles it waited at the throttle. Then random traffic (random
// waits, issues and responses with a reference in-flight count) is
// checked cycle by cycle against a model of the two-interval window,
// including rollovers.
module qdelay_mon_tb;
  localparam int unsigned D_W = 32;
  logic clk = 0, rst_n = 0;
  logic waiting = 0, issue = 0, resp = 0, roll = 0;
  logic [D_W-1:0] qdelay;
  logic [7:0] outstanding;
  int checks = 0, failures = 0;
  longint unsigned m_cur, m_prev, m_out;

  qdelay_mon #(.D_W(D_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Model advances on every rising edge with the inputs driven before it.
  always @(posedge clk) if (rst_n) begin
    longint unsigned c;
    c = m_cur + m_out + waiting;
    if (roll) begin m_prev = c; m_cur = 0; end
    else m_cur = c;
    m_out = m_out + issue - resp;
  end

  task automatic check(string what);
    checks++;
    if (qdelay != D_W'(m_cur + m_prev) || outstanding != 8'(m_out)) begin
      failures++;
      $display("FAIL %s: qdelay %0d (exp %0d) out %0d (exp %0d)", what, qdelay,
               m_cur + m_prev, outstanding, m_out);
    end
  endtask

  initial begin
    m_cur = 0; m_prev = 0; m_out = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Directed: wait 3 cycles, then 40-cycle memory latency -> 43.
    waiting = 1;
    repeat (3) @(negedge clk);
    waiting = 0; issue = 1;
    @(negedge clk) issue = 0;
    repeat (39) @(negedge clk);
    resp = 1;
    @(negedge clk) resp = 0;
    checks++;
    if (qdelay != 43) begin failures++; $display("FAIL directed: %0d", qdelay); end
    check("directed");
    // Rollover keeps the previous interval: value unchanged by the roll.
    roll = 1;
    @(negedge clk) roll = 0;
    checks++;
    if (qdelay != 43) begin failures++; $display("FAIL roll1: %0d", qdelay); end
    roll = 1;
    @(negedge clk) roll = 0;
    checks++;
    if (qdelay != 0) begin failures++; $display("FAIL roll2: %0d", qdelay); end
    // Random traffic.
    for (int n = 0; n < 20000; n++) begin
      waiting = $urandom_range(1);
      issue   = $urandom_range(3) == 0 && m_out < 200;
      resp    = $urandom_range(3) == 0 && (m_out != 0 || issue);
      roll    = $urandom_range(999) == 0;
      @(negedge clk);
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
