// mba_throttle: bandwidth partition enforcement for one application.
//
// Sits after the last-level cache on the application's path to memory and
// delays its requests so that they leave no faster than its bandwidth
// allocation allows, in the manner of memory bandwidth allocation by
// inserted delay: a small allocation means a long delay per request.
//
// How it works: a credit counter gains bw_mbps credits every cycle. A
// request may pass only when the counter holds COST = LINE_BYTES * CLK_MHZ,
// the credit one 64 B line costs, which it then spends. The spacing between
// requests is floor or ceil of COST / bw_mbps cycles and averages exactly
// bw_mbps MB/s (64 cycles, 16 ns, per line for 4 GB/s at 4 GHz). The counter
// is capped at COST + bw_mbps - 1, so idle time earns at most one line of
// credit and bursts are not possible.
//
// Interface: valid/ready on both sides. in_ready = out_ready && allowed,
// out_valid = in_valid && allowed; data travels outside this module
// alongside. The upstream must hold in_valid until in_ready.
// Timing: no added latency when credit is available.
//
// Follows the paper: enforcement by delay, applied after the LLC. This
// design's choice: the credit counter that computes the delay.
module mba_throttle #(
  parameter int unsigned CLK_MHZ    = 4000,
  parameter int unsigned LINE_BYTES = 64,
  parameter int unsigned BW_W       = 17
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [BW_W-1:0]  bw_mbps,
  input  logic             in_valid,
  output logic             in_ready,
  output logic             out_valid,
  input  logic             out_ready
);
  localparam int unsigned COST = LINE_BYTES * CLK_MHZ;
  localparam int unsigned CW   = $clog2(COST + (1 << BW_W) + 1);

  logic [CW-1:0] credit;
  logic          allowed, fire;
  logic [CW-1:0] cap;

  // Credit is capped just below one line plus one cycle's worth, so the
  // remainder of a line's cost is carried to the next request (exact
  // average rate) but idle time cannot build up a burst.
  assign cap = CW'(COST) + CW'(bw_mbps) - 1'b1;

  assign allowed   = (credit >= CW'(COST));
  assign out_valid = in_valid && allowed;
  assign in_ready  = out_ready && allowed;
  assign fire      = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      credit <= CW'(COST);
    end else begin
      logic [CW-1:0] c;
      c = (fire ? credit - CW'(COST) : credit) + CW'(bw_mbps);
      credit <= (c > cap) ? cap : c;
    end
  end

  // Valid/ready rule for the upstream side.
  a_hold_valid: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid);

endmodule
