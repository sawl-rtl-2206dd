// tb_addr_translator: translates addresses of single, merged and maximal
// regions against a preloaded IMT and a real CMT. Checks the physical line
// (D xor (lma mod Q)), the granularity found from neighbouring entries, the
// number of IMT reads a miss costs, hit/miss and the 2-cycle hit latency.
module tb_addr_translator;
  import sawl_pkg::*;
  localparam int unsigned AW = 10, PL = 2, RW = AW - PL, MAXL = 3;
  logic clk = 0, rst_n = 1, req_valid = 0, ready, done, done_hit, done_first;
  logic [AW-1:0] req_lma = '0, done_pma, done_d;
  logic [RW-1:0] done_lrn;
  logic [LVL_W-1:0] done_lvl;
  logic [RW-1:0] cmt_lk_lrn, cmt_ins_lrn, mru_lrn;
  logic cmt_lk_hit, cmt_lk_first, cmt_touch, cmt_ins_valid, mru_valid;
  logic [LVL_W-1:0] cmt_lk_lvl, cmt_ins_lvl, mru_lvl;
  logic [AW-1:0] cmt_lk_d, cmt_ins_d, mru_d;
  logic imt_req, imt_ack;
  logic [RW-1:0] imt_idx;
  logic [ENT_W-1:0] imt_rdata;
  int unsigned n_ops;
  int checks = 0, failures = 0;
  int lvl_of [1 << RW];

  addr_translator #(.AW(AW), .PL(PL), .MAXL(MAXL)) dut (.*);
  cmt #(.N(4), .RW(RW), .DW(AW)) u_cmt (
    .clk, .rst_n, .lk_lrn(cmt_lk_lrn), .lk_hit(cmt_lk_hit), .lk_lvl(cmt_lk_lvl), .lk_d(cmt_lk_d),
    .lk_first(cmt_lk_first), .lk_touch(cmt_touch), .ins_valid(cmt_ins_valid), .ins_lrn(cmt_ins_lrn),
    .ins_lvl(cmt_ins_lvl), .ins_d(cmt_ins_d), .inv_valid(1'b0), .inv_lrn('0), .inv_lvl('0),
    .mru_valid, .mru_lrn, .mru_lvl, .mru_d);
  tb_entry_mem #(.RW(RW), .PL(PL)) mem (
    .clk, .req(imt_req), .we(1'b0), .space(SP_IMT), .idx(imt_idx), .wdata('0),
    .ack(imt_ack), .rdata(imt_rdata), .n_ops);

  always #5 clk = ~clk;
  // asynchronous reset edge at time 1, before the first clock edge
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic xlate(input int lma, input bit exp_hit);
    int t, ops0, lrn, lv, d, exp_pma;
    lrn = lma >> PL; lv = lvl_of[lrn]; d = int'(mem.imt[lrn]);
    exp_pma = d ^ (lma & ((4 << lv) - 1));
    ops0 = int'(n_ops);
    @(negedge clk) begin req_valid = 1; req_lma = AW'(lma); end
    @(negedge clk) req_valid = 0;
    t = 1;
    while (!done) begin @(negedge clk); t++; end
    check(int'(done_pma) == exp_pma, $sformatf("lma %0d pma %0d want %0d", lma, done_pma, exp_pma));
    check(int'(done_lvl) == lv, $sformatf("lma %0d lvl %0d want %0d", lma, done_lvl, lv));
    check(done_hit == exp_hit, $sformatf("lma %0d hit %0b", lma, done_hit));
    check(int'(done_lrn) == (lrn & ~((1 << lv) - 1)), "region base");
    if (exp_hit) check(t == 2, $sformatf("hit latency %0d", t));
    else check(int'(n_ops) - ops0 == 1 + ((lv < MAXL) ? lv + 1 : MAXL),
               $sformatf("miss reads %0d", int'(n_ops) - ops0));
  endtask

  initial begin
    for (int i = 0; i < (1 << RW); i++) lvl_of[i] = 0;
    // a 4-region (16-line) region at entries 8..11, D = block 0x50, key 0xB
    for (int i = 8; i < 12; i++) begin mem.imt[i] = 32'h5B; lvl_of[i] = 2; end
    // a maximal 8-region (32-line) region at entries 16..23, D = block 0x1E0, key 7
    for (int i = 16; i < 24; i++) begin mem.imt[i] = 32'h1E7; lvl_of[i] = 3; end
    // a 2-region region at entries 6..7 with key 5
    for (int i = 6; i < 8; i++) begin mem.imt[i] = 32'h65; lvl_of[i] = 1; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    xlate(5, 0);  xlate(6, 1);
    xlate(33, 0); xlate(47, 1); xlate(40, 1);
    xlate(64, 0); xlate(95, 1); xlate(70, 1);
    xlate(25, 0); xlate(30, 1);
    xlate(200, 0);                     // fifth region evicts the LRU one (lrn 1)
    xlate(5, 0);
    for (int n = 0; n < 40; n++) begin
      int lma;
      lma = $urandom_range(127);
      // expected hit state is not tracked here; run with the observed value
      begin
        int lrn, lv, d;
        lrn = lma >> PL; lv = lvl_of[lrn]; d = int'(mem.imt[lrn]);
        @(negedge clk) begin req_valid = 1; req_lma = AW'(lma); end
        @(negedge clk) req_valid = 0;
        while (!done) @(negedge clk);
        check(int'(done_pma) == (d ^ (lma & ((4 << lv) - 1))), $sformatf("random lma %0d", lma));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
