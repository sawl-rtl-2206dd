// tb_hit_monitor: drives phases of request streams with different hit
// probabilities and first/second-half mixes, and compares every merge/split
// pulse (and the request number it comes at) with a reference model of the
// observation window, sampling period and settling window written here.
module tb_hit_monitor;
  localparam int unsigned WIN = 16, SET = 32, SMP = 8;
  logic clk = 0, rst_n = 1, ev_valid = 0, ev_hit = 0, ev_first = 0;
  logic merge_req, split_req;
  logic [31:0] rate_hits, rate_total;
  int checks = 0, failures = 0, n_merge = 0, n_split = 0;

  hit_monitor #(.WIN(WIN), .SETTLE(SET), .SMP(SMP)) dut (.*);
  always #5 clk = ~clk;
  // asynchronous reset edge at time 1, before the first clock edge
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // reference state
  bit hist[$];
  int cond = 0, since = 0, req_no = 0, h1 = 0, h2 = 0;

  task automatic one(input bit hit, input bit first);
    bit exp_m, exp_s;
    int hits, tot, c;
    req_no++;
    hist.push_back(hit);
    if (hist.size() > WIN) void'(hist.pop_front());
    if (hit && first) h1++;
    if (hit && !first) h2++;
    exp_m = 0; exp_s = 0;
    if (req_no % SMP == 0) begin
      hits = 0; foreach (hist[i]) hits += hist[i];
      tot = hist.size();
      c = (hits * 100 < 90 * tot) ? 1 : ((hits * 100 > 95 * tot) ? 2 : 0);
      if (c != cond || c == 0) since = req_no - 1;
      else if (req_no - since >= SET) begin
        since = req_no;
        if (c == 1) exp_m = 1;
        else if ((h1 + h2) > 0 && (h1 * 100 >= 99 * (h1 + h2) || h2 * 100 >= 99 * (h1 + h2))) exp_s = 1;
      end
      cond = c; h1 = 0; h2 = 0;
    end
    @(negedge clk) begin ev_valid = 1; ev_hit = hit; ev_first = first; end
    @(negedge clk) ev_valid = 0;
    check(merge_req == exp_m && split_req == exp_s,
          $sformatf("req %0d merge %0b/%0b split %0b/%0b", req_no, merge_req, exp_m, split_req, exp_s));
    n_merge += int'(merge_req); n_split += int'(split_req);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (200) one(0, 0);                          // all misses: merges
    repeat (300) one(1, 1);                          // all first-half hits: splits
    repeat (200) one($urandom_range(99) < 92, 1);    // between thresholds: mostly nothing
    repeat (300) one(1, $urandom_range(99) < 50);    // high rate, balanced halves: no split
    repeat (300) one($urandom_range(99) < 60, 1'($urandom_range(1)));
    repeat (300) one(1, 0);                          // second-half skew also splits
    check(n_merge >= 3 && n_split >= 3, $sformatf("merges %0d splits %0d", n_merge, n_split));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
