// tb_line_mover: runs an exchange-style move (two regions trade places and
// keys) and a merge-style move (two regions become one of twice the size
// under one key) on the line-memory model, and checks that every logical line
// ends at its new physical line, that lines outside the two blocks are not
// touched and that the move takes exactly 4 * Q line accesses.
module tb_line_mover;
  import sawl_pkg::*;
  localparam int unsigned AW = 8, LW = 32;
  logic clk = 0, rst_n = 1, start = 0, roff1 = 0, busy, done;
  logic [LVL_W:0] q_lg = '0;
  logic [AW-1:0] dold0 = '0, dold1 = '0, dnew0 = '0, dnew1 = '0;
  logic mem_req, mem_we, mem_ack;
  logic [AW-1:0] mem_addr;
  logic [LW-1:0] mem_wdata, mem_rdata;
  int unsigned n_reads, n_writes;
  int checks = 0, failures = 0;

  line_mover #(.AW(AW), .LW(LW), .QMAXL(4)) dut (.*);
  tb_line_mem #(.AW(AW), .LW(LW)) mem (
    .clk, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .ack(mem_ack), .rdata(mem_rdata), .n_reads, .n_writes);

  always #5 clk = ~clk;
  // asynchronous reset edge at time 1, before the first clock edge
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [LW-1:0] peek(input int a);
    return mem.store.exists(AW'(a)) ? mem.store[AW'(a)] : mem.init_line(AW'(a));
  endfunction

  task automatic move(input int ql, input int o0, input int o1, input int n0, input int n1, input bit ro);
    logic [LW-1:0] lc [2][16];
    logic [LW-1:0] other [256];
    int q, acc0;
    q = 1 << ql;
    for (int r = 0; r < 2; r++)
      for (int o = 0; o < q; o++) lc[r][o] = peek((r ? o1 : o0) ^ o);
    for (int a = 0; a < 256; a++) other[a] = peek(a);
    acc0 = int'(n_reads + n_writes);
    @(negedge clk) begin
      start = 1; q_lg = (LVL_W+1)'(ql); dold0 = AW'(o0); dold1 = AW'(o1);
      dnew0 = AW'(n0); dnew1 = AW'(n1); roff1 = ro;
    end
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    check(int'(n_reads + n_writes) - acc0 == 4 * q, "access count");
    for (int r = 0; r < 2; r++)
      for (int o = 0; o < q; o++) begin
        int pa;
        pa = (r ? n1 : n0) ^ (o | ((r && ro) ? q : 0));
        check(peek(pa) == lc[r][o], $sformatf("region %0d line %0d at %0d", r, o, pa));
      end
    // lines outside both blocks are untouched
    for (int a = 0; a < 256; a++)
      if ((a & ~(q - 1)) != (o0 & ~(q - 1)) && (a & ~(q - 1)) != (o1 & ~(q - 1)))
        if (peek(a) != other[a]) begin
          check(0, $sformatf("line %0d disturbed", a));
        end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    move(2, 'h13, 'h42, 'h41, 'h10, 0);   // exchange of two 4-line regions
    move(2, 'h21, 'h26, 'h25, 'h25, 1);   // merge into one 8-line region, key 5
    move(3, 'h25, 'h8B, 'h8E, 'h21, 0);   // exchange of two 8-line regions
    move(1, 'h90, 'h93, 'h92, 'h92, 1);   // merge of two 2-line regions
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
