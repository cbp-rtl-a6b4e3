// cache_alloc: Lookahead cache allocation controller.
//
// Divides UNITS cache allocation units (32 KB each by default) among N_APPS
// applications so that the workload's total number of misses goes down, using
// each application's ATD hit curve: hits[i][p] is the number of hits the
// application saw at LRU stack position p, so giving it units a..a+k-1 saves
// sum(hits[i][a..a+k-1]) misses.
//
// How it works: on `start` every application first gets MIN_UNITS (min_ways).
// Then, round after round until no unit is left:
//  - SCAN: for k = 1 .. remaining, every application in parallel adds the
//    next hit counter to a running sum and keeps the k with the largest
//    marginal utility sum/k (the smallest such k on a tie). One k per cycle.
//  - PICK: the application with the largest best marginal utility wins
//    (lowest index on a tie), one application per cycle.
//  - the winner gets its best k units, and remaining shrinks by k.
// Fractions are compared by cross-multiplying, so there is no divider.
// An application that already owns all UNITS positions of its curve is
// left out of a round.
//
// Interface: start (one-cycle pulse, ignored while busy), hits (read
// live; the caller holds them steady), alloc (units per application,
// valid from reset: an equal split), done (one-cycle pulse when alloc
// has been updated), busy.
// Timing: a round takes remaining + N_APPS + 1 cycles; the worst case at the
// defaults (192 rounds of one unit) is about 40,000 cycles, well inside the
// 10 ms reconfiguration interval.
//
// Follows the paper: Lookahead with a min_ways floor for every application.
// This design's choices: the cycle-by-cycle schedule, the tie rules, the
// equal split out of reset.
module cache_alloc #(
  parameter int unsigned N_APPS    = 16,
  parameter int unsigned UNITS     = 256,
  parameter int unsigned MIN_UNITS = 4,
  parameter int unsigned CNT_W     = 32,
  localparam int unsigned AW       = $clog2(UNITS + 1),
  localparam int unsigned AI_W     = (N_APPS > 1) ? $clog2(N_APPS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [CNT_W-1:0]  hits  [N_APPS][UNITS],
  output logic [AW-1:0]     alloc [N_APPS],
  output logic              done,
  output logic              busy
);
  localparam int unsigned SW = CNT_W + AW;     // running-sum width
  localparam int unsigned PW = SW + AW;        // product width
  localparam int unsigned PI_W = (UNITS > 1) ? $clog2(UNITS) : 1;

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_PICK, S_APPLY} state_e;
  state_e state;

  logic [AW-1:0]   work   [N_APPS];
  logic [SW-1:0]   sum    [N_APPS];
  logic [SW-1:0]   bsum   [N_APPS];
  logic [AW-1:0]   bk     [N_APPS];
  logic [AW-1:0]   k;
  logic [AW-1:0]   remaining;
  logic [AI_W-1:0] j;
  logic [AI_W-1:0] win;
  logic            win_ok;

  assign busy = (state != S_IDLE);

  // a/b > c/d with b, d > 0
  function automatic logic frac_gt(input logic [SW-1:0] a, input logic [AW-1:0] b,
                                   input logic [SW-1:0] c, input logic [AW-1:0] d);
    logic [PW-1:0] l, r;
    l = PW'(a) * PW'(d);
    r = PW'(c) * PW'(b);
    return l > r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      done      <= 1'b0;
      k         <= '0;
      remaining <= '0;
      j         <= '0;
      win       <= '0;
      win_ok    <= 1'b0;
      for (int i = 0; i < N_APPS; i++) begin
        alloc[i] <= AW'(UNITS / N_APPS);
        work[i]  <= '0;
        sum[i]   <= '0;
        bsum[i]  <= '0;
        bk[i]    <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          for (int i = 0; i < N_APPS; i++) begin
            work[i] <= AW'(MIN_UNITS);
            sum[i]  <= '0;
            bsum[i] <= '0;
            bk[i]   <= '0;
          end
          remaining <= AW'(UNITS - N_APPS * MIN_UNITS);
          k         <= AW'(1);
          if (UNITS == N_APPS * MIN_UNITS) begin
            for (int i = 0; i < N_APPS; i++) alloc[i] <= AW'(MIN_UNITS);
            done  <= 1'b1;
          end else begin
            state <= S_SCAN;
          end
        end

        S_SCAN: begin
          for (int i = 0; i < N_APPS; i++) begin
            if ({1'b0, work[i]} + {1'b0, k} <= (AW + 1)'(UNITS)) begin
              logic [SW-1:0] s;
              s = sum[i] + SW'(hits[i][PI_W'(work[i] + k - 1'b1)]);
              sum[i] <= s;
              if (k == AW'(1) || frac_gt(s, k, bsum[i], bk[i])) begin
                bsum[i] <= s;
                bk[i]   <= k;
              end
            end
          end
          if (k == remaining) begin
            state  <= S_PICK;
            j      <= '0;
            win_ok <= 1'b0;
          end else begin
            k <= k + 1'b1;
          end
        end

        S_PICK: begin
          if (bk[j] != '0 &&
              (!win_ok || frac_gt(bsum[j], bk[j], bsum[win], bk[win]))) begin
            win    <= j;
            win_ok <= 1'b1;
          end
          if (j == AI_W'(N_APPS - 1)) state <= S_APPLY;
          else                         j     <= j + 1'b1;
        end

        S_APPLY: begin
          logic [AW-1:0] left;
          left = win_ok ? remaining - bk[win] : '0;
          if (win_ok) work[win] <= work[win] + bk[win];
          remaining <= left;
          for (int i = 0; i < N_APPS; i++) begin
            sum[i]  <= '0;
            bsum[i] <= '0;
            bk[i]   <= '0;
          end
          k <= AW'(1);
          if (left == '0) begin
            for (int i = 0; i < N_APPS; i++)
              alloc[i] <= (win_ok && AI_W'(i) == win) ? work[i] + bk[i] : work[i];
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= S_SCAN;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
