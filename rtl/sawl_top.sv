// sawl_top: self-adaptive wear-leveling unit of an NVM memory controller.
//
// Sits between the last-level cache and the NVM. Every host line access is
// translated (addr_translator, backed by the CMT and by the IMT/GTD through
// imt_access), then performed at the physical line. Every translation reports
// hit/miss to hit_monitor; every data write is counted by data_exchange, which
// swaps the written region with a random one once per swapping period. When
// the monitor asks for a larger or smaller granularity, region_reconfig merges
// or splits the region of the most recently used CMT entry.
//
// The unit handles one host request at a time and runs at most one
// maintenance operation (exchange, merge or split) at a time, between host
// requests; each engine owns the shared IMT and data-line ports while it runs.
//
// Ports:
//   h_*    host line requests: h_req/h_we/h_lma/h_wdata taken when h_ready;
//          h_done pulses with h_rdata (reads) and the physical line h_pma.
//   nvm_*  data-line port to the NVM (req/ack, one line per access).
//   tl_*   translation-line port to the reserved NVM/DRAM space (IMT lines at
//          {0,tpma}, owner-table lines at {1,line}).
//   gtd_upd_*  writes a new translation-line placement into the GTD.
//   stat_* event counters.
module sawl_top
  import sawl_pkg::*;
#(
  parameter int unsigned AW     = LA_W,
  parameter int unsigned PL     = P_LG,
  parameter int unsigned LW     = LINE_W,
  parameter int unsigned MAXL   = MAX_LVL,
  parameter int unsigned NCMT   = CMT_N,
  parameter int unsigned NTL    = ((1 << (AW - PL)) + K - 1) / K,
  parameter int unsigned TA_W   = $clog2(NTL),
  parameter int unsigned WIN    = SOW,
  parameter int unsigned SETTLE = SSW,
  parameter int unsigned SMP    = SAMPLE,
  parameter int unsigned PERIOD = SWAP_PERIOD
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               h_req,
  input  logic               h_we,
  input  logic [AW-1:0]      h_lma,
  input  logic [LW-1:0]      h_wdata,
  output logic               h_ready,
  output logic               h_done,
  output logic [LW-1:0]      h_rdata,
  output logic [AW-1:0]      h_pma,
  output logic               nvm_req,
  output logic               nvm_we,
  output logic [AW-1:0]      nvm_addr,
  output logic [LW-1:0]      nvm_wdata,
  input  logic               nvm_ack,
  input  logic [LW-1:0]      nvm_rdata,
  output logic               tl_req,
  output logic               tl_we,
  output logic [TA_W:0]      tl_addr,
  output logic [TL_W-1:0]    tl_wdata,
  input  logic               tl_ack,
  input  logic [TL_W-1:0]    tl_rdata,
  input  logic               gtd_upd_we,
  input  logic [TA_W-1:0]    gtd_upd_tlma,
  input  logic [TA_W-1:0]    gtd_upd_tpma,
  output logic [31:0]        stat_hits,
  output logic [31:0]        stat_misses,
  output logic [31:0]        stat_merge_reqs,
  output logic [31:0]        stat_split_reqs,
  output logic [31:0]        stat_merges,
  output logic [31:0]        stat_splits,
  output logic [31:0]        stat_refused,
  output logic [31:0]        stat_exchanges,
  output logic [31:0]        stat_xskipped,
  output logic [31:0]        stat_rate_hits,
  output logic [31:0]        stat_rate_total
);
  localparam int unsigned RW = AW - PL;
  typedef enum logic [2:0] {U_IDLE, U_TRANS, U_DATA, U_WR, U_XWAIT, U_RECONF} state_e;
  state_e st;

  logic          we_q, pend_merge, pend_split;
  logic [AW-1:0] pma_q;
  logic [LW-1:0] wd_q;
  logic [RW-1:0] rg_lrn_q;
  logic [LVL_W-1:0] rg_lvl_q;
  logic [AW-1:0] rg_d_q;

  // ---------------- CMT
  logic [RW-1:0]    lk_lrn, ins_lrn, inv_lrn, mru_lrn;
  logic             lk_hit, lk_first, lk_touch, ins_valid, inv_valid, mru_valid;
  logic [LVL_W-1:0] lk_lvl, ins_lvl, inv_lvl, mru_lvl;
  logic [AW-1:0]    lk_d, ins_d, mru_d;
  cmt #(.N(NCMT), .RW(RW), .DW(AW)) u_cmt (
    .clk, .rst_n, .lk_lrn, .lk_hit, .lk_lvl, .lk_d, .lk_first, .lk_touch,
    .ins_valid, .ins_lrn, .ins_lvl, .ins_d, .inv_valid, .inv_lrn, .inv_lvl,
    .mru_valid, .mru_lrn, .mru_lvl, .mru_d
  );

  // ---------------- IMT access (with GTD)
  logic             ia_ready, ia_req, ia_we, ia_ack;
  space_e           ia_space;
  logic [RW-1:0]    ia_idx;
  logic [ENT_W-1:0] ia_wdata, ia_rdata;
  imt_access #(.IDX_W(RW), .NTL(NTL), .TA_W(TA_W)) u_imt (
    .clk, .rst_n, .ready(ia_ready), .req(ia_req), .we(ia_we), .space(ia_space),
    .idx(ia_idx), .wdata(ia_wdata), .ack(ia_ack), .rdata(ia_rdata),
    .tl_req, .tl_we, .tl_addr, .tl_wdata, .tl_ack, .tl_rdata,
    .gtd_upd_we, .gtd_upd_tlma, .gtd_upd_tpma
  );

  // ---------------- translator
  logic             tr_req, tr_ready, tr_done, tr_hit, tr_first, tr_imt_req;
  logic [AW-1:0]    tr_pma, tr_d;
  logic [RW-1:0]    tr_lrn, tr_imt_idx;
  logic [LVL_W-1:0] tr_lvl;
  addr_translator #(.AW(AW), .PL(PL), .MAXL(MAXL)) u_tr (
    .clk, .rst_n, .req_valid(tr_req), .req_lma(h_lma), .ready(tr_ready),
    .done(tr_done), .done_pma(tr_pma), .done_hit(tr_hit), .done_first(tr_first),
    .done_lrn(tr_lrn), .done_lvl(tr_lvl), .done_d(tr_d),
    .cmt_lk_lrn(lk_lrn), .cmt_lk_hit(lk_hit), .cmt_lk_lvl(lk_lvl), .cmt_lk_d(lk_d),
    .cmt_lk_first(lk_first), .cmt_touch(lk_touch), .cmt_ins_valid(ins_valid),
    .cmt_ins_lrn(ins_lrn), .cmt_ins_lvl(ins_lvl), .cmt_ins_d(ins_d),
    .imt_req(tr_imt_req), .imt_idx(tr_imt_idx), .imt_ack(ia_ack & (st == U_TRANS)),
    .imt_rdata(ia_rdata)
  );

  // ---------------- hit monitor
  logic mon_merge, mon_split;
  hit_monitor #(.WIN(WIN), .SETTLE(SETTLE), .SMP(SMP)) u_mon (
    .clk, .rst_n, .ev_valid(tr_done), .ev_hit(tr_hit), .ev_first(tr_first),
    .merge_req(mon_merge), .split_req(mon_split),
    .rate_hits(stat_rate_hits), .rate_total(stat_rate_total)
  );

  // ---------------- data exchange
  logic             x_busy, x_imt_req, x_imt_we, x_mem_req, x_mem_we, x_inv_valid;
  space_e           x_imt_space;
  logic [RW-1:0]    x_imt_idx, x_inv_lrn;
  logic [ENT_W-1:0] x_imt_wdata;
  logic [AW-1:0]    x_mem_addr;
  logic [LW-1:0]    x_mem_wdata;
  logic [LVL_W-1:0] x_inv_lvl;
  data_exchange #(.AW(AW), .PL(PL), .LW(LW), .MAXL(MAXL), .PERIOD(PERIOD)) u_x (
    .clk, .rst_n, .wr_valid(st == U_WR), .wr_lrn(rg_lrn_q), .wr_lvl(rg_lvl_q), .wr_d(rg_d_q),
    .busy(x_busy), .exchanges(stat_exchanges), .skipped(stat_xskipped),
    .imt_req(x_imt_req), .imt_we(x_imt_we), .imt_space(x_imt_space), .imt_idx(x_imt_idx),
    .imt_wdata(x_imt_wdata), .imt_ack(ia_ack & (st == U_XWAIT)), .imt_rdata(ia_rdata),
    .mem_req(x_mem_req), .mem_we(x_mem_we), .mem_addr(x_mem_addr), .mem_wdata(x_mem_wdata),
    .mem_ack(nvm_ack & (st == U_XWAIT)), .mem_rdata(nvm_rdata),
    .cmt_inv_valid(x_inv_valid), .cmt_inv_lrn(x_inv_lrn), .cmt_inv_lvl(x_inv_lvl)
  );

  // ---------------- region split / merge
  logic             r_busy, r_imt_req, r_imt_we, r_mem_req, r_mem_we, r_inv_valid;
  logic             merge_go, split_go;
  space_e           r_imt_space;
  logic [RW-1:0]    r_imt_idx, r_inv_lrn;
  logic [ENT_W-1:0] r_imt_wdata;
  logic [AW-1:0]    r_mem_addr;
  logic [LW-1:0]    r_mem_wdata;
  logic [LVL_W-1:0] r_inv_lvl;
  region_reconfig #(.AW(AW), .PL(PL), .LW(LW), .MAXL(MAXL)) u_rc (
    .clk, .rst_n, .merge_go, .split_go, .tgt_lrn(mru_lrn), .tgt_lvl(mru_lvl), .tgt_d(mru_d),
    .busy(r_busy), .merges(stat_merges), .splits(stat_splits), .refused(stat_refused),
    .imt_req(r_imt_req), .imt_we(r_imt_we), .imt_space(r_imt_space), .imt_idx(r_imt_idx),
    .imt_wdata(r_imt_wdata), .imt_ack(ia_ack & (st == U_RECONF)), .imt_rdata(ia_rdata),
    .mem_req(r_mem_req), .mem_we(r_mem_we), .mem_addr(r_mem_addr), .mem_wdata(r_mem_wdata),
    .mem_ack(nvm_ack & (st == U_RECONF)), .mem_rdata(nvm_rdata),
    .cmt_inv_valid(r_inv_valid), .cmt_inv_lrn(r_inv_lrn), .cmt_inv_lvl(r_inv_lvl)
  );

  // ---------------- control
  logic pend_any;
  always_comb begin
    pend_any = pend_merge || pend_split;
    h_ready  = (st == U_IDLE) && ia_ready && !pend_any && tr_ready;
    tr_req   = h_ready && h_req;
    merge_go = (st == U_IDLE) && pend_merge && mru_valid;
    split_go = (st == U_IDLE) && !pend_merge && pend_split && mru_valid;
    h_done   = (st == U_DATA) && nvm_ack;
    h_rdata  = nvm_rdata;
    h_pma    = pma_q;

    inv_valid = x_inv_valid || r_inv_valid;
    inv_lrn   = x_inv_valid ? x_inv_lrn : r_inv_lrn;
    inv_lvl   = x_inv_valid ? x_inv_lvl : r_inv_lvl;

    ia_req = 1'b0; ia_we = 1'b0; ia_space = SP_IMT; ia_idx = tr_imt_idx; ia_wdata = '0;
    nvm_req = 1'b0; nvm_we = 1'b0; nvm_addr = pma_q; nvm_wdata = wd_q;
    unique case (st)
      U_TRANS: ia_req = tr_imt_req;
      U_DATA: begin nvm_req = 1'b1; nvm_we = we_q; end
      U_XWAIT: begin
        ia_req = x_imt_req; ia_we = x_imt_we; ia_space = x_imt_space;
        ia_idx = x_imt_idx; ia_wdata = x_imt_wdata;
        nvm_req = x_mem_req; nvm_we = x_mem_we; nvm_addr = x_mem_addr; nvm_wdata = x_mem_wdata;
      end
      U_RECONF: begin
        ia_req = r_imt_req; ia_we = r_imt_we; ia_space = r_imt_space;
        ia_idx = r_imt_idx; ia_wdata = r_imt_wdata;
        nvm_req = r_mem_req; nvm_we = r_mem_we; nvm_addr = r_mem_addr; nvm_wdata = r_mem_wdata;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= U_IDLE; we_q <= 1'b0; pma_q <= '0; wd_q <= '0;
      rg_lrn_q <= '0; rg_lvl_q <= '0; rg_d_q <= '0;
      pend_merge <= 1'b0; pend_split <= 1'b0;
      stat_hits <= '0; stat_misses <= '0; stat_merge_reqs <= '0; stat_split_reqs <= '0;
    end else begin
      if (mon_merge) begin pend_merge <= 1'b1; stat_merge_reqs <= stat_merge_reqs + 1; end
      if (mon_split) begin pend_split <= 1'b1; stat_split_reqs <= stat_split_reqs + 1; end
      unique case (st)
        U_IDLE: begin
          if (pend_any) begin
            // a request without a cached region to act on is dropped
            pend_merge <= 1'b0;
            pend_split <= 1'b0;
            if (mru_valid) st <= U_RECONF;
          end else if (tr_req) begin
            we_q  <= h_we;
            wd_q  <= h_wdata;
            st    <= U_TRANS;
          end
        end
        U_TRANS: if (tr_done) begin
          pma_q    <= tr_pma;
          rg_lrn_q <= tr_lrn;
          rg_lvl_q <= tr_lvl;
          rg_d_q   <= tr_d;
          if (tr_hit) stat_hits <= stat_hits + 1;
          else        stat_misses <= stat_misses + 1;
          st <= U_DATA;
        end
        U_DATA:  if (nvm_ack) st <= we_q ? U_WR : U_IDLE;
        U_WR:    st <= U_XWAIT;
        U_XWAIT: if (!x_busy) st <= U_IDLE;
        U_RECONF: if (!r_busy) st <= U_IDLE;
        default: st <= U_IDLE;
      endcase
    end
  end
endmodule
