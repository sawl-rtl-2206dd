// tb_sawl_top: end-to-end test of the wear-leveling unit on a small memory
// (1024 lines of 32 bits, 4-line base regions, 8 CMT entries, short monitor
// windows, an exchange every 8 writes). The host side runs three phases:
//   1. wide random reads and writes over the whole memory: the CMT hit rate
//      falls under the low threshold and the unit merges regions;
//   2. a narrow hot set of reads in one region: the hit rate climbs and the
//      hits crowd into the first half of the CMT, so the unit splits regions;
//   3. mixed traffic again, then a read sweep over every line.
// A reference model keeps the data of every logical line. Each access is
// checked for data (reads) and for its physical line, recomputed from the
// translation lines in the memory model (D ^ (lma mod Q) with Q found from
// neighbouring entries). The test counts hits, misses, merge and split
// requests, merges, splits, refusals and exchanges, and counts a failure for
// each mechanism that never happened.
module tb_sawl_top;
  import sawl_pkg::*;
  localparam int unsigned AW = 10, PL = 2, RW = AW - PL, LW = 32, MAXL = 3, NCMT = 8;
  localparam int unsigned NTL = ((1 << RW) + K - 1) / K, TA_W = $clog2(NTL);
  localparam int unsigned NL = 1 << AW;
  logic clk = 0, rst_n = 1;
  logic h_req = 0, h_we = 0, h_ready, h_done;
  logic [AW-1:0] h_lma = '0, h_pma;
  logic [LW-1:0] h_wdata = '0, h_rdata;
  logic nvm_req, nvm_we, nvm_ack;
  logic [AW-1:0] nvm_addr;
  logic [LW-1:0] nvm_wdata, nvm_rdata;
  logic tl_req, tl_we, tl_ack;
  logic [TA_W:0] tl_addr;
  logic [TL_W-1:0] tl_wdata, tl_rdata;
  logic [31:0] stat_hits, stat_misses, stat_merge_reqs, stat_split_reqs, stat_merges,
               stat_splits, stat_refused, stat_exchanges, stat_xskipped,
               stat_rate_hits, stat_rate_total;
  int unsigned n_reads, n_writes;
  int checks = 0, failures = 0, n_req = 0;
  logic [LW-1:0] content [NL];

  sawl_top #(.AW(AW), .PL(PL), .LW(LW), .MAXL(MAXL), .NCMT(NCMT), .NTL(NTL), .TA_W(TA_W),
             .WIN(64), .SETTLE(96), .SMP(32), .PERIOD(8)) dut (
    .clk, .rst_n, .h_req, .h_we, .h_lma, .h_wdata, .h_ready, .h_done, .h_rdata, .h_pma,
    .nvm_req, .nvm_we, .nvm_addr, .nvm_wdata, .nvm_ack, .nvm_rdata,
    .tl_req, .tl_we, .tl_addr, .tl_wdata, .tl_ack, .tl_rdata,
    .gtd_upd_we(1'b0), .gtd_upd_tlma('0), .gtd_upd_tpma('0),
    .stat_hits, .stat_misses, .stat_merge_reqs, .stat_split_reqs, .stat_merges,
    .stat_splits, .stat_refused, .stat_exchanges, .stat_xskipped,
    .stat_rate_hits, .stat_rate_total);
  tb_line_mem #(.AW(AW), .LW(LW)) lmem (
    .clk, .req(nvm_req), .we(nvm_we), .addr(nvm_addr), .wdata(nvm_wdata),
    .ack(nvm_ack), .rdata(nvm_rdata), .n_reads, .n_writes);
  tb_tl_mem #(.TA_W(TA_W), .PL(PL), .K(K), .ENT_W(ENT_W)) tmem (
    .clk, .req(tl_req), .we(tl_we), .addr(tl_addr), .wdata(tl_wdata),
    .ack(tl_ack), .rdata(tl_rdata));

  always #5 clk = ~clk;
  // asynchronous reset edge at time 1, before the first clock edge
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // IMT entry of region r as held in the translation-line model (the GTD is
  // left at its identity placement, so line r / K sits at address r / K)
  function automatic int imt_of(input int r);
    logic [TA_W:0] a;
    logic [TL_W-1:0] v;
    a = {1'b0, TA_W'(r / K)};
    v = tmem.store.exists(a) ? tmem.store[a] : tmem.init_line(a);
    return int'(v[(r % K) * ENT_W +: ENT_W]);
  endfunction
  function automatic int level_of(input int r);
    int k;
    k = 0;
    while (k < MAXL && imt_of(r ^ (1 << k)) == imt_of(r)) k++;
    return k;
  endfunction
  function automatic int ref_pma(input int lma);
    return imt_of(lma >> PL) ^ (lma & ((4 << level_of(lma >> PL)) - 1));
  endfunction

  task automatic access(input bit we, input int lma);
    logic [LW-1:0] wd;
    wd = LW'($urandom);
    @(negedge clk);
    while (!h_ready) @(negedge clk);
    h_req = 1; h_we = we; h_lma = AW'(lma); h_wdata = wd;
    @(negedge clk) h_req = 0;
    while (!h_done) @(negedge clk);
    check(int'(h_pma) == ref_pma(lma), $sformatf("req %0d lma %0d pma %0d want %0d",
          n_req, lma, h_pma, ref_pma(lma)));
    if (we) content[lma] = wd;
    else check(h_rdata == content[lma], $sformatf("req %0d lma %0d data", n_req, lma));
    n_req++;
  endtask

  initial begin
    int hot;
    for (int l = 0; l < NL; l++) content[l] = lmem.init_line(AW'(l));
    repeat (2) @(negedge clk);
    rst_n = 1;
    // phase 1: wide random traffic
    for (int n = 0; n < 1500; n++) access($urandom_range(3) == 0, $urandom_range(NL - 1));
    $display("phase 1: hits %0d misses %0d merge_reqs %0d merges %0d refused %0d exchanges %0d",
             stat_hits, stat_misses, stat_merge_reqs, stat_merges, stat_refused, stat_exchanges);
    // phase 2: a hot set inside one region, reads with a few writes
    for (int n = 0; n < 3000; n++) begin
      // the hot region is one the first phase merged, so that it can split
      if (n % 500 == 0) begin
        hot = $urandom_range(NL - 1) & ~3;
        for (int t = 0; t < 64 && level_of(hot >> PL) == 0; t++) hot = $urandom_range(NL - 1) & ~3;
      end
      access($urandom_range(49) == 0, hot | $urandom_range(3));
    end
    $display("phase 2: hits %0d misses %0d split_reqs %0d splits %0d refused %0d exchanges %0d",
             stat_hits, stat_misses, stat_split_reqs, stat_splits, stat_refused, stat_exchanges);
    // phase 3: mixed traffic, then every line is read back
    for (int n = 0; n < 800; n++) access($urandom_range(1) == 0, $urandom_range(NL - 1));
    for (int l = 0; l < NL; l++) access(0, l);
    check(stat_hits > 0, $sformatf("CMT hits: %0d", stat_hits));
    check(stat_misses > 0, $sformatf("CMT misses: %0d", stat_misses));
    check(stat_merge_reqs > 0, $sformatf("merge requests: %0d", stat_merge_reqs));
    check(stat_split_reqs > 0, $sformatf("split requests: %0d", stat_split_reqs));
    check(stat_merges > 0, $sformatf("merges: %0d", stat_merges));
    check(stat_splits > 0, $sformatf("splits: %0d", stat_splits));
    check(stat_exchanges > 0, $sformatf("exchanges: %0d", stat_exchanges));
    check(stat_hits + stat_misses == 32'(n_req), "one translation per request");
    $display("totals: req %0d hits %0d misses %0d merge_reqs %0d split_reqs %0d merges %0d splits %0d refused %0d exchanges %0d skipped %0d",
             n_req, stat_hits, stat_misses, stat_merge_reqs, stat_split_reqs, stat_merges,
             stat_splits, stat_refused, stat_exchanges, stat_xskipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
