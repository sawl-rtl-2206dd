// hit_monitor: runtime CMT hit-rate monitor and granularity controller.
//
// Every translated request reports whether it hit the CMT and, if so, whether
// the hit was in the first or the second half of the LRU stack. The hit rate
// is the share of hits among the last SOW requests (the observation window),
// kept exactly with a one-bit-per-request circular history and a running hit
// count. Every SAMPLE requests the rate is compared with the two thresholds:
// below LOW_PCT the "low" condition holds, above HIGH_PCT the "high" one. A
// condition must hold at consecutive samples for at least SSW requests (the
// settling window) before the controller acts:
//   low  -> merge_req (grow the region size),
//   high -> split_req, but only if the first-half or second-half hit count
//           of the last sample period is at least SKEW_PCT of all hits.
// After a request the settling count restarts. Before the window is full the
// rate is taken over the requests seen so far.
//
// Interface: ev_valid/ev_hit/ev_first, one request per cycle at most.
// merge_req and split_req are one-cycle pulses issued at the clock edge that
// ends a sample period. rate_hits/rate_total expose the last sampled window.
module hit_monitor
  import sawl_pkg::*;
#(
  parameter int unsigned WIN    = SOW,
  parameter int unsigned SETTLE = SSW,
  parameter int unsigned SMP    = SAMPLE,
  parameter int unsigned LOW    = LOW_PCT,
  parameter int unsigned HIGH   = HIGH_PCT,
  parameter int unsigned SKEW   = SKEW_PCT
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ev_valid,
  input  logic        ev_hit,
  input  logic        ev_first,
  output logic        merge_req,
  output logic        split_req,
  output logic [31:0] rate_hits,
  output logic [31:0] rate_total
);
  localparam int unsigned PW = (WIN > 1) ? $clog2(WIN) : 1;
  typedef enum logic [1:0] {C_NONE, C_LOW, C_HIGH} cond_e;

  logic           hist [WIN];
  logic [PW-1:0]  ptr;
  logic           full;
  logic [31:0]    fill, win_hits, smp_cnt, settle_cnt, h1, h2;
  cond_e          cond;

  logic [31:0] hits_n, total_n, fill_n;
  logic [63:0] h100, tot_lo, tot_hi, skew_l, skew_r1, skew_r2;
  logic        low_now, high_now, skew_now, smp_end;
  cond_e       cond_now;

  always_comb begin
    hits_n  = win_hits + 32'(ev_hit) - ((full && hist[ptr]) ? 32'd1 : 32'd0);
    fill_n  = full ? fill : fill + 1;
    total_n = fill_n;
    h100    = 64'(hits_n) * 100;
    tot_lo  = 64'(total_n) * LOW;
    tot_hi  = 64'(total_n) * HIGH;
    low_now  = h100 < tot_lo;
    high_now = h100 > tot_hi;
    skew_l  = (64'(h1) + 64'(h2) + 64'(ev_hit)) * SKEW;
    skew_r1 = 64'(h1 + 32'(ev_hit && ev_first)) * 100;
    skew_r2 = 64'(h2 + 32'(ev_hit && !ev_first)) * 100;
    skew_now = (skew_l != 0) && ((skew_r1 >= skew_l) || (skew_r2 >= skew_l));
    cond_now = low_now ? C_LOW : (high_now ? C_HIGH : C_NONE);
    smp_end  = ev_valid && (smp_cnt == SMP - 1);
  end

  always_ff @(posedge clk) if (ev_valid) hist[ptr] <= ev_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0; full <= 1'b0; fill <= '0; win_hits <= '0;
      smp_cnt <= '0; settle_cnt <= '0; h1 <= '0; h2 <= '0;
      cond <= C_NONE; merge_req <= 1'b0; split_req <= 1'b0;
      rate_hits <= '0; rate_total <= '0;
    end else begin
      merge_req <= 1'b0;
      split_req <= 1'b0;
      if (ev_valid) begin
        win_hits <= hits_n;
        fill     <= fill_n;
        if (ptr == PW'(WIN - 1)) begin
          ptr  <= '0;
          full <= 1'b1;
        end else ptr <= ptr + 1'b1;
        settle_cnt <= settle_cnt + 1;
        if (smp_end) begin
          smp_cnt    <= '0;
          h1         <= '0;
          h2         <= '0;
          rate_hits  <= hits_n;
          rate_total <= total_n;
          cond       <= cond_now;
          if (cond_now != cond || cond_now == C_NONE) settle_cnt <= 32'd1;
          else if (settle_cnt + 1 >= SETTLE) begin
            settle_cnt <= '0;
            if (cond_now == C_LOW) merge_req <= 1'b1;
            else if (skew_now) split_req <= 1'b1;
          end
        end else begin
          smp_cnt <= smp_cnt + 1;
          if (ev_hit && ev_first)  h1 <= h1 + 1;
          if (ev_hit && !ev_first) h2 <= h2 + 1;
        end
      end
    end
  end
endmodule
