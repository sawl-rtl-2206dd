// tb_imt_access: reads and writes single IMT and owner-table entries through
// the GTD and the K-entries-per-line packing, against the translation-line
// model, and checks that a GTD remap redirects IMT reads.
module tb_imt_access;
  import sawl_pkg::*;
  localparam int unsigned IW = 8, NTL = 43, TA = 6;
  logic clk = 0, rst_n = 1, ready, req = 0, we = 0, ack;
  space_e space = SP_IMT;
  logic [IW-1:0] idx = '0;
  logic [ENT_W-1:0] wdata = '0, rdata;
  logic tl_req, tl_we, tl_ack;
  logic [TA:0] tl_addr;
  logic [TL_W-1:0] tl_wdata, tl_rdata;
  logic gtd_upd_we = 0;
  logic [TA-1:0] gtd_upd_tlma = '0, gtd_upd_tpma = '0;
  int checks = 0, failures = 0;

  imt_access #(.IDX_W(IW), .NTL(NTL), .TA_W(TA)) dut (.*);
  tb_tl_mem #(.TA_W(TA), .PL(P_LG), .K(K), .ENT_W(ENT_W)) mem (
    .clk, .req(tl_req), .we(tl_we), .addr(tl_addr), .wdata(tl_wdata), .ack(tl_ack), .rdata(tl_rdata));

  always #5 clk = ~clk;
  // asynchronous reset edge at time 1, before the first clock edge
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic op(input bit w, input space_e s, input int i, input int d, output int v);
    @(negedge clk) begin req = 1; we = w; space = s; idx = IW'(i); wdata = ENT_W'(d); end
    do @(posedge clk); while (!ack);
    v = int'(rdata);
    @(negedge clk) req = 0;
  endtask

  initial begin
    int v;
    int shadow [256];
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (ready);
    for (int i = 0; i < 256; i++) shadow[i] = i << P_LG;
    for (int i = 0; i < 40; i++) begin
      op(0, SP_IMT, i, 0, v);
      check(v == shadow[i], $sformatf("initial IMT[%0d]=%0d", i, v));
    end
    for (int i = 0; i < 256; i += 5) begin
      op(1, SP_IMT, i, i * 3 + 1, v); shadow[i] = i * 3 + 1;
    end
    for (int i = 0; i < 256; i++) begin
      op(0, SP_IMT, i, 0, v);
      check(v == shadow[i], $sformatf("IMT[%0d]=%0d want %0d", i, v, shadow[i]));
    end
    op(1, SP_PRT, 7, 99, v);
    op(0, SP_PRT, 7, 0, v);  check(v == 99, "PRT write/read");
    op(0, SP_PRT, 8, 0, v);  check(v == 8, "PRT initial");
    op(0, SP_IMT, 7, 0, v);  check(v == shadow[7], "IMT unaffected by PRT write");
    // move translation line 0 to physical line 9: entry 2 now reads slot 2 of line 9
    @(negedge clk) begin gtd_upd_we = 1; gtd_upd_tlma = 0; gtd_upd_tpma = 9; end
    @(negedge clk) gtd_upd_we = 0;
    op(0, SP_IMT, 2, 0, v);
    check(v == shadow[9 * K + 2], $sformatf("GTD remap read %0d", v));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
