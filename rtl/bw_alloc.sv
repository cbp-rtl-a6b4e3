// bw_alloc: bandwidth allocation controller.
//
// Splits the off-chip bandwidth among the applications in proportion to the
// memory queuing delay each of them experienced, on top of a guaranteed
// minimum:
//   remaining = TOTAL_BW - MIN_BW * N_APPS
//   bw[i]     = MIN_BW + floor(qdelay[i] * remaining / sum(qdelay))
// Applications that wait longer for memory get a larger share.
//
// How it works: on `start` the delays are summed, one application per cycle
// (N_APPS cycles), then each share is computed by a shared restoring divider,
// one quotient bit per cycle (NUM_W cycles per application). The new
// allocation is published all at once with `done`. The floor loses at most
// N_APPS - 1 MB/s in all; that remainder is left unallocated. If every delay
// is zero the remaining bandwidth is split equally.
//
// Interface: start (one-cycle pulse, ignored while busy), qdelay (sampled
// into a snapshot on start), bw (MB/s per application, an equal
// split out of reset), done (one-cycle pulse), busy.
// Timing: N_APPS + N_APPS * (NUM_W + 1) + 1 cycles from start to done,
// about 1,100 cycles at the defaults.
//
// Follows the paper: the allocation formula and the minimum allocation
// (1 GB/s, with 4 x 16 GB/s in total). This design's choices: MB/s units,
// floor rounding, the all-zero case, and the serial divider.
module bw_alloc #(
  parameter int unsigned N_APPS   = 16,
  parameter int unsigned TOTAL_BW = 64000,   // MB/s
  parameter int unsigned MIN_BW   = 1000,    // MB/s
  parameter int unsigned D_W      = 48,      // queuing delay width
  localparam int unsigned BW_W    = $clog2(TOTAL_BW + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [D_W-1:0]    qdelay [N_APPS],
  output logic [BW_W-1:0]   bw     [N_APPS],
  output logic              done,
  output logic              busy
);
  localparam int unsigned REMAIN = TOTAL_BW - MIN_BW * N_APPS;
  localparam int unsigned TW     = D_W + $clog2(N_APPS + 1);  // total delay width
  localparam int unsigned NUM_W  = D_W + BW_W;                 // numerator width
  localparam int unsigned AI_W   = (N_APPS > 1) ? $clog2(N_APPS) : 1;
  localparam int unsigned BI_W   = $clog2(NUM_W + 1);

  typedef enum logic [1:0] {S_IDLE, S_SUM, S_DIV, S_DONE} state_e;
  state_e state;

  logic [TW-1:0]    total;
  logic [AI_W-1:0]  i;
  logic [BI_W-1:0]  bitn;
  logic [NUM_W-1:0] num;
  logic [TW:0]      rem;
  logic [NUM_W-1:0] quo;
  logic [BW_W-1:0]  nbw [N_APPS];
  logic [D_W-1:0]   snap [N_APPS];   // delays captured at start

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      total <= '0;
      i     <= '0;
      bitn  <= '0;
      num   <= '0;
      rem   <= '0;
      quo   <= '0;
      for (int a = 0; a < N_APPS; a++) begin
        bw[a]   <= BW_W'(TOTAL_BW / N_APPS);
        nbw[a]  <= '0;
        snap[a] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          for (int a = 0; a < N_APPS; a++) snap[a] <= qdelay[a];
          total <= '0;
          i     <= '0;
          state <= S_SUM;
        end

        // Algorithm lines 3-6: total delay, minimum allocation.
        S_SUM: begin
          total <= total + TW'(snap[i]);
          if (i == AI_W'(N_APPS - 1)) begin
            i     <= '0;
            num   <= NUM_W'(snap[0]) * NUM_W'(REMAIN);
            rem   <= '0;
            quo   <= '0;
            bitn  <= BI_W'(NUM_W);
            state <= S_DIV;
          end else begin
            i <= i + 1'b1;
          end
        end

        // Algorithm lines 7-9: proportional share, one quotient bit per cycle.
        S_DIV: begin
          if (bitn != '0) begin
            logic [TW:0] r;
            r = {rem[TW-1:0], num[NUM_W-1]};
            num <= num << 1;
            if (r >= {1'b0, total}) begin
              rem <= r - {1'b0, total};
              quo <= {quo[NUM_W-2:0], 1'b1};
            end else begin
              rem <= r;
              quo <= {quo[NUM_W-2:0], 1'b0};
            end
            bitn <= bitn - 1'b1;
          end else begin
            if (total == '0) nbw[i] <= BW_W'(MIN_BW + REMAIN / N_APPS);
            else             nbw[i] <= BW_W'(MIN_BW) + BW_W'(quo);
            if (i == AI_W'(N_APPS - 1)) begin
              state <= S_DONE;
            end else begin
              i    <= i + 1'b1;
              num  <= NUM_W'(snap[i + 1'b1]) * NUM_W'(REMAIN);
              rem  <= '0;
              quo  <= '0;
              bitn <= BI_W'(NUM_W);
            end
          end
        end

        S_DONE: begin
          for (int a = 0; a < N_APPS; a++) bw[a] <= nbw[a];
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
