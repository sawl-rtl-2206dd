// tb_sawl_attack: the two write attacks used to judge wear leveling, run on
// the whole unit at a reduced size (1024 lines, 8 CMT entries, an exchange
// every 8 writes).
//   RAA (repeated address attack): one logical line is written over and over.
//   BPA (birthday-paradox attack): a random logical line is written until its
//   physical line changes, then the next random line is taken.
// A monitor on the NVM port counts the writes every physical line receives,
// migration writes included. Without wear leveling the attacked line would
// take every write; the test checks that the hottest physical line takes only
// a small share, that most of memory shares the wear, that the attacked
// address keeps moving, and that every line still holds its data afterwards.
module tb_sawl_attack;
  import sawl_pkg::*;
  localparam int unsigned AW = 10, PL = 2, LW = 32, MAXL = 3, NCMT = 8;
  localparam int unsigned NTL = ((1 << (AW - PL)) + K - 1) / K, TA_W = $clog2(NTL);
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
  int checks = 0, failures = 0;
  logic [LW-1:0] content [NL];
  int wear [NL];

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
  always @(posedge clk) if (nvm_req && nvm_we && nvm_ack) wear[nvm_addr]++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // one host access; returns the physical line it used
  task automatic access(input bit we, input int lma, output int pma);
    logic [LW-1:0] wd;
    wd = LW'($urandom);
    @(negedge clk);
    while (!h_ready) @(negedge clk);
    h_req = 1; h_we = we; h_lma = AW'(lma); h_wdata = wd;
    @(negedge clk) h_req = 0;
    while (!h_done) @(negedge clk);
    pma = int'(h_pma);
    if (we) content[lma] = wd;
    else check(h_rdata == content[lma], $sformatf("lma %0d data", lma));
  endtask

  task automatic wear_report(input string tag, input int host_writes);
    int mx, used, tot;
    mx = 0; used = 0; tot = 0;
    for (int a = 0; a < NL; a++) begin
      if (wear[a] > mx) mx = wear[a];
      if (wear[a] > 0) used++;
      tot += wear[a];
    end
    $display("%s: host writes %0d, NVM writes %0d, hottest line %0d, lines written %0d of %0d, exchanges %0d",
             tag, host_writes, tot, mx, used, NL, stat_exchanges);
    check(mx * 20 < host_writes, $sformatf("%s: hottest line takes under 5%% of the attack", tag));
    check(used * 2 > int'(NL), $sformatf("%s: over half of memory shares the wear", tag));
  endtask

  initial begin
    int p, p0, moves, target;
    for (int l = 0; l < NL; l++) begin content[l] = lmem.init_line(AW'(l)); wear[l] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // RAA: one logical line, 6000 writes
    target = int'($urandom_range(NL - 1));
    moves = 0;
    access(1, target, p0);
    for (int n = 1; n < 6000; n++) begin
      access(1, target, p);
      if (p != p0) moves++;
      p0 = p;
    end
    wear_report("RAA", 6000);
    check(moves > 300, $sformatf("RAA: attacked line moved %0d times", moves));
    // BPA: write a random line until it is remapped, 6000 writes
    for (int l = 0; l < NL; l++) wear[l] = 0;
    begin
      int n, lines;
      n = 0; lines = 0;
      while (n < 6000) begin
        target = int'($urandom_range(NL - 1));
        access(1, target, p0); n++;
        lines++;
        p = p0;
        while (p == p0 && n < 6000) begin access(1, target, p); n++; end
      end
      $display("BPA: %0d lines attacked", lines);
      check(lines > 50, "BPA: attacked lines were remapped");
    end
    wear_report("BPA", 6000);
    // every line still holds its data
    for (int l = 0; l < NL; l++) access(0, l, p);
    check(stat_exchanges > 0, "exchanges happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
