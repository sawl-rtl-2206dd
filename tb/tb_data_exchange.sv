// tb_data_exchange: issues data-write events for random regions of a small
// memory (with one merged region in it) and, after every exchange, checks the
// whole mapping: every logical line still holds its original data at
// D ^ (lma mod Q), the mapping is a bijection, region sizes are unchanged,
// the owner table names the right region, and an exchange starts exactly
// once per swapping period.
module tb_data_exchange;
  import sawl_pkg::*;
  localparam int unsigned AW = 8, PL = 2, RW = AW - PL, LW = 32, MAXL = 2, PER = 4;
  localparam int unsigned NL = 1 << AW, NR = 1 << RW;
  logic clk = 0, rst_n = 1, wr_valid = 0, busy;
  logic [RW-1:0] wr_lrn = '0, imt_idx, cmt_inv_lrn;
  logic [LVL_W-1:0] wr_lvl = '0, cmt_inv_lvl;
  logic [AW-1:0] wr_d = '0, mem_addr;
  logic [31:0] exchanges, skipped;
  logic imt_req, imt_we, imt_ack, mem_req, mem_we, mem_ack, cmt_inv_valid;
  space_e imt_space;
  logic [ENT_W-1:0] imt_wdata, imt_rdata;
  logic [LW-1:0] mem_wdata, mem_rdata;
  int unsigned n_ops, n_reads, n_writes;
  int checks = 0, failures = 0, n_inv = 0;
  logic [LW-1:0] content [NL];   // logical line -> data

  data_exchange #(.AW(AW), .PL(PL), .LW(LW), .MAXL(MAXL), .PERIOD(PER)) dut (.*);
  tb_entry_mem #(.RW(RW), .PL(PL)) emem (
    .clk, .req(imt_req), .we(imt_we), .space(imt_space), .idx(imt_idx), .wdata(imt_wdata),
    .ack(imt_ack), .rdata(imt_rdata), .n_ops);
  tb_line_mem #(.AW(AW), .LW(LW)) lmem (
    .clk, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .ack(mem_ack), .rdata(mem_rdata), .n_reads, .n_writes);

  always #5 clk = ~clk;
  // asynchronous reset edge at time 1, before the first clock edge
  initial #1 rst_n = 0;
  always @(posedge clk) if (cmt_inv_valid) n_inv++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [LW-1:0] peek(input int a);
    return lmem.store.exists(AW'(a)) ? lmem.store[AW'(a)] : lmem.init_line(AW'(a));
  endfunction
  function automatic int level_of(input int lrn);
    int k;
    k = 0;
    while (k < MAXL && emem.imt[lrn ^ (1 << k)] == emem.imt[lrn]) k++;
    return k;
  endfunction
  function automatic int pma_of(input int lma);
    int lrn, lv;
    lrn = lma >> PL; lv = level_of(lrn);
    return int'(emem.imt[lrn]) ^ (lma & ((4 << lv) - 1));
  endfunction

  task automatic check_all(input string tag);
    bit used [NL];
    int bad;
    bad = 0;
    for (int a = 0; a < NL; a++) used[a] = 0;
    for (int l = 0; l < NL; l++) begin
      int p;
      p = pma_of(l);
      if (used[p] || peek(p) != content[l]) bad++;
      used[p] = 1;
    end
    check(bad == 0, $sformatf("%s: %0d logical lines misplaced", tag, bad));
    check(level_of(10) == 1 && level_of(11) == 1, $sformatf("%s: merged region kept its size", tag));
    bad = 0;
    for (int r = 0; r < NR; r++) begin
      int lv, base;
      lv = level_of(r); base = r & ~((1 << lv) - 1);
      if (int'(emem.prt[(pma_of(r << PL) >> PL)]) != base) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d owner-table entries wrong", tag, bad));
  endtask

  initial begin
    int writes;
    // entries 10 and 11 form one 8-line region at block 40..47 with key 2
    emem.imt[10] = 32'h2A; emem.imt[11] = 32'h2A;
    emem.prt[10] = 10; emem.prt[11] = 10;
    for (int l = 0; l < NL; l++) content[l] = peek(pma_of(l));
    repeat (2) @(negedge clk);
    rst_n = 1;
    writes = 0;
    for (int n = 0; n < 48; n++) begin
      int lrn, lv;
      lrn = (n % 5 == 0) ? 11 : $urandom_range(NR - 1);
      lv = level_of(lrn);
      @(negedge clk) begin
        wr_valid = 1; wr_lrn = RW'(lrn & ~((1 << lv) - 1)); wr_lvl = LVL_W'(lv);
        wr_d = AW'(emem.imt[lrn]);
      end
      @(negedge clk) wr_valid = 0;
      writes++;
      check(busy == (writes % PER == 0), $sformatf("write %0d busy %0b", writes, busy));
      while (busy) @(negedge clk);
      if (writes % PER == 0) check_all($sformatf("after write %0d", writes));
    end
    check(exchanges + skipped == 48 / PER, $sformatf("exchanges %0d skipped %0d", exchanges, skipped));
    check(exchanges >= 6, "most exchanges done");
    check(n_inv == 2 * exchanges, "two CMT invalidations per exchange");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
