// tb_region_reconfig: reproduces the merge and split examples of the design
// (two-line initial regions: lrn0->prn3, lrn1->prn8, lrn5->prn2 merged into
// one four-line region at prn2/3 with lrn5 moved to prn8; the merged region
// with key 3 at prn2 split back into lrn0 at prn3 and lrn1 at prn2, both with
// key 1) and then runs random merges and splits. After each operation the
// whole mapping is checked: data of every logical line at D ^ (lma mod Q),
// bijection, owner table, and that a split moves no data.
module tb_region_reconfig;
  import sawl_pkg::*;
  localparam int unsigned AW = 5, PL = 1, RW = AW - PL, LW = 32, MAXL = 2;
  localparam int unsigned NL = 1 << AW, NR = 1 << RW;
  logic clk = 0, rst_n = 1, merge_go = 0, split_go = 0, busy;
  logic [RW-1:0] tgt_lrn = '0, imt_idx, cmt_inv_lrn;
  logic [LVL_W-1:0] tgt_lvl = '0, cmt_inv_lvl;
  logic [AW-1:0] tgt_d = '0, mem_addr;
  logic [31:0] merges, splits, refused;
  logic imt_req, imt_we, imt_ack, mem_req, mem_we, mem_ack, cmt_inv_valid;
  space_e imt_space;
  logic [ENT_W-1:0] imt_wdata, imt_rdata;
  logic [LW-1:0] mem_wdata, mem_rdata;
  int unsigned n_ops, n_reads, n_writes;
  int checks = 0, failures = 0, n_inv = 0;
  logic [LW-1:0] content [NL];

  region_reconfig #(.AW(AW), .PL(PL), .LW(LW), .MAXL(MAXL)) dut (.*);
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
    return int'(emem.imt[lrn]) ^ (lma & ((2 << lv) - 1));
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
    bad = 0;
    for (int r = 0; r < NR; r++) begin
      int lv, base;
      lv = level_of(r); base = r & ~((1 << lv) - 1);
      for (int c = 0; c < (1 << lv); c++)
        if (int'(emem.prt[((int'(emem.imt[r]) >> PL) & ~((1 << lv) - 1)) + c]) != base) begin bad++; $display("prt r=%0d c=%0d", r, c); end
    end
    check(bad == 0, $sformatf("%s: %0d owner-table entries wrong", tag, bad));
  endtask

  // place logical region lrn at physical region prn with key
  task automatic place(input int lrn, input int prn, input int key);
    emem.imt[lrn] = ENT_W'((prn << PL) | key);
    emem.prt[prn] = ENT_W'(lrn);
  endtask

  task automatic op(input bit mg, input int lrn);
    int lv, base;
    lv = level_of(lrn); base = lrn & ~((1 << lv) - 1);
    @(negedge clk) begin
      merge_go = mg; split_go = !mg; tgt_lrn = RW'(base); tgt_lvl = LVL_W'(lv);
      tgt_d = AW'(emem.imt[lrn]);
    end
    @(negedge clk) begin merge_go = 0; split_go = 0; end
    while (busy) @(negedge clk);
  endtask

  int lrns [16] = '{0, 1, 5, 2, 3, 4, 6, 7, 8, 9, 10, 11, 12, 13, 14, 15};
  int prns [16] = '{3, 8, 2, 0, 1, 4, 5, 6, 7, 9, 10, 11, 12, 13, 14, 15};
  int keys [16] = '{0, 1, 1, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};

  initial begin
    int acc0, m0, s0;
    // ---- example 1: merge
    for (int i = 0; i < 16; i++) place(lrns[i], prns[i], keys[i]);
    for (int l = 0; l < NL; l++) content[l] = peek(pma_of(l));
    repeat (2) @(negedge clk);
    rst_n = 1;
    op(1, 0);
    check(merges == 1, "merge done");
    check(emem.imt[0] == emem.imt[1] && (emem.imt[0] >> 2) == 1, "lrn0/lrn1 share D in prn2..3");
    check(emem.imt[5] == 17, $sformatf("lrn5 moved to prn8 with key 1 (D=%0d)", emem.imt[5]));
    check(level_of(0) == 1, "merged level");
    check_all("merge example");
    // split it again: no data moves
    acc0 = int'(n_reads + n_writes);
    op(0, 1);
    check(int'(n_reads + n_writes) == acc0, "split moves no data");
    check(level_of(0) == 0 && level_of(1) == 0, "split levels");
    check_all("split after merge");

    // ---- example 2: lrn0/lrn1 as one 4-line region at prn2..3 with key 3
    // (the state before the split example); lrn0 and lrn1 are at prn2/3 now
    place(0, 2, 3); place(1, 2, 3); emem.prt[3] = 0;
    for (int l = 0; l < NL; l++) content[l] = peek(pma_of(l));
    s0 = int'(splits);
    op(0, 0);
    check(int'(splits) == s0 + 1, "split done");
    check(emem.imt[0] == ENT_W'((3 << PL) | 1), $sformatf("lrn0 -> prn3 key1 (D=%0d)", emem.imt[0]));
    check(emem.imt[1] == ENT_W'((2 << PL) | 1), $sformatf("lrn1 -> prn2 key1 (D=%0d)", emem.imt[1]));
    check_all("split example");

    // ---- random merges and splits
    m0 = int'(merges); s0 = int'(splits);
    for (int n = 0; n < 60; n++) begin
      op($urandom_range(2) != 0, $urandom_range(NR - 1));
      check_all($sformatf("random op %0d", n));
    end
    check(int'(merges) > m0 + 3 && int'(splits) > s0 + 3,
          $sformatf("random: merges %0d splits %0d refused %0d", merges, splits, refused));
    check(refused > 0, "some operations refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
