// mba_throttle_tb: self-checking test of the bandwidth throttle.
//
// With a request always waiting and memory always ready, the spacing of
// requests must be floor or ceil of COST/bw cycles (COST = 64 B * 4000 MHz)
// and the number passed in a window must match bw/COST per cycle to within
// one request, for several allocations (1, 4, 12 and 16 GB/s). Also checks
// that nothing passes while memory is not ready and that the handshake
// outputs agree.
module mba_throttle_tb;
  localparam int unsigned CLK_MHZ = 4000, LINE = 64, BW_W = 17;
  localparam int unsigned COST = CLK_MHZ * LINE;
  logic clk = 0, rst_n = 0;
  logic [BW_W-1:0] bw_mbps = 17'd4000;
  logic in_valid = 0, out_ready = 1;
  logic in_ready, out_valid;
  int checks = 0, failures = 0;

  mba_throttle #(.CLK_MHZ(CLK_MHZ), .LINE_BYTES(LINE), .BW_W(BW_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rate(input int unsigned bw, input int unsigned window);
    int unsigned fires, last, gap, lo, hi;
    longint unsigned expn;
    logic first;
    bw_mbps = BW_W'(bw);
    in_valid = 1;
    fires = 0; first = 1; last = 0;
    lo = COST / bw; hi = (COST + bw - 1) / bw;
    for (int unsigned c = 0; c < window; c++) begin
      @(negedge clk);
      checks++;
      if (out_valid != (in_valid && in_ready)) failures++;
      if (in_valid && in_ready) begin
        if (!first) begin
          gap = c - last;
          checks++;
          if (gap < lo || gap > hi) begin
            failures++;
            $display("FAIL bw %0d: gap %0d not in [%0d,%0d]", bw, gap, lo, hi);
          end
        end
        first = 0; last = c; fires++;
      end
    end
    expn = (longint'(window) * bw) / COST;
    checks++;
    if (fires + 1 < expn || fires > expn + 2) begin
      failures++;
      $display("FAIL bw %0d: %0d requests in %0d cycles, expected about %0d", bw, fires, window, expn);
    end
    while (!in_ready) @(negedge clk);   // let the pending request go
    @(negedge clk);
    in_valid = 0;
    repeat (300) @(negedge clk);   // refill to one line of credit
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    rate(4000, 6400);
    rate(1000, 25600);
    rate(12000, 6400);
    rate(16000, 6400);
    // Memory not ready: nothing passes even with credit.
    in_valid = 1; out_ready = 0;
    repeat (50) begin
      @(negedge clk);
      checks++;
      if (in_ready) failures++;   // out_valid may stay high: valid does not wait for ready
    end
    out_ready = 1;
    #1;
    checks++;
    if (!in_ready) begin failures++; $display("FAIL no credit after stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
