// tb_gtd: checks the GTD's identity initialisation sweep (its length in
// cycles), synchronous reads and updates.
module tb_gtd;
  localparam int unsigned N = 20, AW = 5;
  logic clk = 0, rst_n = 1, init_done, upd_we = 0;
  logic [AW-1:0] rd_tlma = '0, rd_tpma, upd_tlma = '0, upd_tpma = '0;
  int checks = 0, failures = 0, cyc = 0;

  gtd #(.N(N), .ADDR_W(AW)) dut (.*);

  always #5 clk = ~clk;
  // asynchronous reset edge at time 1, before the first clock edge
  initial #1 rst_n = 0;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic rd(input int a, output int v);
    @(negedge clk) rd_tlma = AW'(a);
    @(negedge clk) v = int'(rd_tpma);
  endtask

  initial begin
    int v, t0;
    repeat (2) @(negedge clk);
    rst_n = 1; t0 = cyc;
    wait (init_done);
    check(cyc - t0 == N || cyc - t0 == N + 1, $sformatf("init took %0d cycles", cyc - t0));
    for (int a = 0; a < N; a++) begin rd(a, v); check(v == a, $sformatf("identity %0d -> %0d", a, v)); end
    // remap a few translation lines
    for (int a = 0; a < N; a += 3) begin
      @(negedge clk) upd_we = 1; upd_tlma = AW'(a); upd_tpma = AW'((a * 7 + 3) % N);
    end
    @(negedge clk) upd_we = 0;
    for (int a = 0; a < N; a++) begin
      rd(a, v);
      check(v == ((a % 3 == 0) ? (a * 7 + 3) % N : a), $sformatf("after update %0d -> %0d", a, v));
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
