// tb_cmt: checks CMT lookup across merged spans, LRU replacement order,
// first/second-half classification of hits, range invalidation and the MRU
// output against a small reference list kept in the testbench.
module tb_cmt;
  import sawl_pkg::*;
  localparam int unsigned N = 4, RW = 10, DW = 12;
  logic clk = 0, rst_n = 1;
  logic [RW-1:0] lk_lrn = '0, ins_lrn = '0, inv_lrn = '0, mru_lrn;
  logic lk_hit, lk_first, lk_touch = 0, ins_valid = 0, inv_valid = 0, mru_valid;
  logic [LVL_W-1:0] lk_lvl, ins_lvl = '0, inv_lvl = '0, mru_lvl;
  logic [DW-1:0] lk_d, ins_d = '0, mru_d;
  int checks = 0, failures = 0;

  cmt #(.N(N), .RW(RW), .DW(DW)) dut (.*);
  always #5 clk = ~clk;
  // asynchronous reset edge at time 1, before the first clock edge
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic ins(input int l, input int lv, input int d);
    @(negedge clk) begin ins_valid = 1; ins_lrn = RW'(l); ins_lvl = LVL_W'(lv); ins_d = DW'(d); end
    @(negedge clk) ins_valid = 0;
  endtask
  // look up; expect hit/miss; touch on hit
  task automatic look(input int l, input bit exp_hit, input int exp_d, input bit exp_first);
    @(negedge clk) lk_lrn = RW'(l);
    #1;
    check(lk_hit == exp_hit, $sformatf("lrn %0d hit=%0b", l, lk_hit));
    if (exp_hit) begin
      check(int'(lk_d) == exp_d, $sformatf("lrn %0d d=%0d want %0d", l, lk_d, exp_d));
      check(lk_first == exp_first, $sformatf("lrn %0d first=%0b", l, lk_first));
    end
    lk_touch = exp_hit;
    @(negedge clk) lk_touch = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    look(5, 0, 0, 0);
    check(!mru_valid, "empty after reset");
    ins(4, 1, 100);                 // region 4..5
    ins(8, 2, 200);                 // region 8..11
    ins(1, 0, 300);
    ins(20, 0, 400);                // stack: 20,1,8,4
    check(mru_valid && mru_lrn == 20 && mru_d == 400, "MRU is last insert");
    look(5, 1, 100, 0);             // rank 3 -> second half; stack 4,20,1,8
    look(11, 1, 200, 0);            // 8 at rank 3; stack 8,4,20,1
    look(9, 1, 200, 1);             // rank 0
    look(12, 0, 0, 0);
    ins(30, 0, 500);                // evicts LRU = 1; stack 30,8,4,20
    look(1, 0, 0, 0);
    look(20, 1, 400, 0);            // rank 3
    check(mru_lrn == 20 && mru_lvl == 0, "MRU after touch");
    // invalidate span 8..15 (lvl 3 at 8) removes entry 8
    @(negedge clk) begin inv_valid = 1; inv_lrn = 8; inv_lvl = 3; end
    @(negedge clk) inv_valid = 0;
    look(10, 0, 0, 0);
    look(4, 1, 100, 0);             // stack 4,20,30,(8 invalid)
    ins(40, 0, 600);                // fills invalid slot, nothing valid evicted
    look(30, 1, 500, 0);
    look(20, 1, 400, 0);
    look(40, 1, 600, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
