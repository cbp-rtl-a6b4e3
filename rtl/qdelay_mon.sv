// qdelay_mon: memory queuing delay monitor of one application.
//
// Measures the time the application's memory requests spend between leaving
// the last-level cache (an LLC miss, before the bandwidth throttle) and
// their data coming back. Every cycle it adds the number of requests in
// flight to an accumulator: those sent to memory and not yet answered, plus
// one if a request is waiting at the bandwidth throttle. The accumulator so
// grows by each request's full access time, throttle delay included,
// without tracking requests one by one.
//
// The reported delay covers the current and the previous reconfiguration
// interval: on `roll` the current sum becomes the previous one and the
// current sum restarts from zero, so qdelay = previous + current.
//
// Interface: waiting (a request is held at the throttle this cycle), issue
// (a request was sent to memory this cycle), resp (a response came back
// this cycle), roll (interval boundary pulse). qdelay and
// outstanding are registered.
// Timing: a request sent in cycle t and answered in cycle t+L adds L, plus
// one per cycle it waited before t.
//
// Follows the paper: delay measured as memory access time per application,
// accumulated with the previous interval. This design's choices: the
// in-flight counting, the two-interval window, widths, saturation.
module qdelay_mon #(
  parameter int unsigned D_W   = 48,
  parameter int unsigned OUT_W = 8     // up to 255 requests in flight
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              waiting,
  input  logic              issue,
  input  logic              resp,
  input  logic              roll,
  output logic [D_W-1:0]    qdelay,
  output logic [OUT_W-1:0]  outstanding
);
  logic [D_W-1:0] cur, prev;

  function automatic logic [D_W-1:0] sat_add(input logic [D_W-1:0] a, input logic [D_W-1:0] b);
    logic [D_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[D_W] ? '1 : s[D_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur         <= '0;
      prev        <= '0;
      outstanding <= '0;
    end else begin
      logic [D_W-1:0] c;
      c = sat_add(cur, D_W'(outstanding) + D_W'(waiting));
      if (roll) begin
        prev <= c;
        cur  <= '0;
      end else begin
        cur  <= c;
      end
      outstanding <= outstanding + OUT_W'(issue) - OUT_W'(resp);
    end
  end

  assign qdelay = sat_add(cur, prev);

  // A response needs a request in flight; the in-flight count must not wrap.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    resp |-> (outstanding != '0 || issue));
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    issue && !resp |-> outstanding != '1);

endmodule
