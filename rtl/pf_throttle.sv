// pf_throttle: prefetch throttling controller.
//
// Decides, for every application, whether its prefetcher stays on for the
// next prefetch interval. The decision uses the instructions each core
// retired during two equally long sampling windows, one with all
// prefetchers on and one with all off. Because the windows have the same
// length, the ratio of the two instruction counts is the IPC speedup from
// prefetching, and the prefetcher is enabled when
//   on_cnt / off_cnt > THRESH_NUM / THRESH_DEN   (speedup_threshold 1.05)
// which is evaluated as on_cnt * THRESH_DEN > off_cnt * THRESH_NUM.
//
// Interface: inst_ret[i] is the number of instructions core i retired this
// cycle (0..4 for a 4-wide core). clear zeroes both counters; count_on and
// count_off select the window being counted; decide updates pf_en from the
// counts; a clear in the first cycle of a window keeps that cycle's count.
// pf_en is the per-application setting (1 = prefetcher enabled),
// all ones out of reset.
// Timing: pf_en changes the cycle after decide.
//
// Follows the paper: the two-setting comparison against speedup_threshold.
// The paper's pseudo-code writes 0 for a speedup above the threshold and 1
// otherwise while its text says a speedup above the threshold activates the
// prefetcher; here pf_en = 1 means enabled, which satisfies the text. This
// design's choices: counting instructions over equal windows instead of
// dividing by cycles, the counter width, enabled out of reset.
module pf_throttle #(
  parameter int unsigned N_APPS     = 16,
  parameter int unsigned IW         = 3,
  parameter int unsigned CNT_W      = 32,
  parameter int unsigned THRESH_NUM = 105,
  parameter int unsigned THRESH_DEN = 100
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [IW-1:0]     inst_ret [N_APPS],
  input  logic              clear,
  input  logic              count_on,
  input  logic              count_off,
  input  logic              decide,
  output logic [N_APPS-1:0] pf_en,
  output logic [CNT_W-1:0]  on_cnt  [N_APPS],
  output logic [CNT_W-1:0]  off_cnt [N_APPS]
);
  localparam int unsigned PW = CNT_W + $clog2(THRESH_NUM + THRESH_DEN + 1);

  function automatic logic [CNT_W-1:0] sat_add(input logic [CNT_W-1:0] a, input logic [IW-1:0] b);
    logic [CNT_W:0] s;
    s = {1'b0, a} + (CNT_W + 1)'(b);
    return s[CNT_W] ? '1 : s[CNT_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pf_en <= '1;
      for (int i = 0; i < N_APPS; i++) begin
        on_cnt[i]  <= '0;
        off_cnt[i] <= '0;
      end
    end else begin
      for (int i = 0; i < N_APPS; i++) begin
        if (clear) begin
          // A window may open in the same cycle: count its first cycle.
          on_cnt[i]  <= count_on  ? CNT_W'(inst_ret[i]) : '0;
          off_cnt[i] <= count_off ? CNT_W'(inst_ret[i]) : '0;
        end else begin
          if (count_on)  on_cnt[i]  <= sat_add(on_cnt[i],  inst_ret[i]);
          if (count_off) off_cnt[i] <= sat_add(off_cnt[i], inst_ret[i]);
        end
        if (decide)
          pf_en[i] <= (PW'(on_cnt[i]) * PW'(THRESH_DEN)) > (PW'(off_cnt[i]) * PW'(THRESH_NUM));
      end
    end
  end

  a_one_window: assert property (@(posedge clk) disable iff (!rst_n)
    !(count_on && count_off));

endmodule
