// cmt: Cached Mapping Table.
//
// A small on-chip table of recently used IMT entries, managed as an LRU stack.
// Each entry is (lrn, wlg, D): the first logical region of a possibly merged
// region, its granularity as a level (wlg = P << lvl lines, the region spans
// 2^lvl initial regions) and its address information D. A lookup hits when the
// requested logical region falls inside an entry's span, so one entry of a
// merged region covers all its initial regions.
//
// Recency is kept as an explicit rank per entry (0 = most recently used), a
// permutation of 0..N-1. A hit or an insert moves the entry to rank 0 and
// pushes every younger entry down by one. The insert victim is an invalid
// entry if there is one, otherwise the entry at rank N-1. The rank of a hit
// tells whether it fell in the first or second half of the stack, which feeds
// the two hit counters of the split decision.
//
// Interface: lookup is combinational on lk_lrn (lk_hit, lk_lvl, lk_d,
// lk_first); lk_touch at a clock edge promotes the hit entry. ins_* inserts a
// new entry, inv_* invalidates every entry overlapping the aligned span
// [inv_lrn, inv_lrn + 2^inv_lvl). One operation per cycle, priority
// invalidate > insert > touch. mru_* shows the rank-0 entry.
module cmt
  import sawl_pkg::*;
#(
  parameter int unsigned N  = CMT_N,
  parameter int unsigned RW = LRN_W,
  parameter int unsigned DW = LA_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [RW-1:0]    lk_lrn,
  output logic             lk_hit,
  output logic [LVL_W-1:0] lk_lvl,
  output logic [DW-1:0]    lk_d,
  output logic             lk_first,
  input  logic             lk_touch,
  input  logic             ins_valid,
  input  logic [RW-1:0]    ins_lrn,
  input  logic [LVL_W-1:0] ins_lvl,
  input  logic [DW-1:0]    ins_d,
  input  logic             inv_valid,
  input  logic [RW-1:0]    inv_lrn,
  input  logic [LVL_W-1:0] inv_lvl,
  output logic             mru_valid,
  output logic [RW-1:0]    mru_lrn,
  output logic [LVL_W-1:0] mru_lvl,
  output logic [DW-1:0]    mru_d
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [N-1:0]     valid;
  logic [RW-1:0]    base [N];
  logic [LVL_W-1:0] lvl  [N];
  logic [DW-1:0]    dval [N];
  logic [IW-1:0]    rank [N];

  logic [IW-1:0] hit_idx, hit_rank, vic_idx, vic_rank, mru_idx;
  logic          have_inv;

  always_comb begin
    lk_hit   = 1'b0;
    hit_idx  = '0;
    have_inv = 1'b0;
    vic_idx  = '0;
    mru_idx  = '0;
    for (int unsigned e = 0; e < N; e++) begin
      if (!lk_hit && valid[e] && (((lk_lrn ^ base[e]) >> lvl[e]) == '0)) begin
        lk_hit  = 1'b1;
        hit_idx = IW'(e);
      end
      if (!have_inv && !valid[e]) begin
        have_inv = 1'b1;
        vic_idx  = IW'(e);
      end
      if (rank[e] == '0) mru_idx = IW'(e);
    end
    if (!have_inv)
      for (int unsigned e = 0; e < N; e++)
        if (rank[e] == IW'(N - 1)) vic_idx = IW'(e);
    hit_rank  = rank[hit_idx];
    vic_rank  = rank[vic_idx];
    lk_lvl    = lvl[hit_idx];
    lk_d      = dval[hit_idx];
    lk_first  = (hit_rank < IW'(N / 2)) || (N == 1);
    mru_valid = valid[mru_idx];
    mru_lrn   = base[mru_idx];
    mru_lvl   = lvl[mru_idx];
    mru_d     = dval[mru_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned e = 0; e < N; e++) begin
        valid[e] <= 1'b0;
        rank[e] <= IW'(e);
        base[e] <= '0;
        lvl[e]  <= '0;
        dval[e] <= '0;
      end
    end else if (inv_valid) begin
      for (int unsigned e = 0; e < N; e++) begin
        logic [LVL_W-1:0] mx;
        mx = (lvl[e] > inv_lvl) ? lvl[e] : inv_lvl;
        if (((base[e] ^ inv_lrn) >> mx) == '0) valid[e] <= 1'b0;
      end
    end else if (ins_valid) begin
      for (int unsigned e = 0; e < N; e++)
        if (rank[e] < vic_rank) rank[e] <= rank[e] + 1'b1;
      rank[vic_idx]  <= '0;
      valid[vic_idx] <= 1'b1;
      base[vic_idx]  <= ins_lrn;
      lvl[vic_idx]   <= ins_lvl;
      dval[vic_idx]  <= ins_d;
    end else if (lk_touch && lk_hit) begin
      for (int unsigned e = 0; e < N; e++)
        if (rank[e] < hit_rank) rank[e] <= rank[e] + 1'b1;
      rank[hit_idx] <= '0;
    end
  end
endmodule
