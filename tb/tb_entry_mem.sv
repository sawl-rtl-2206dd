// tb_entry_mem: behavioural model of the entry-level IMT/owner-table port
// (the port imt_access offers), for testbenches of the blocks that use it.
// imt[i] starts as i << PL (identity placement, key 0), prt[i] as i. One-cycle
// req/ack; testbenches may preload or inspect the arrays directly.
module tb_entry_mem
  import sawl_pkg::*;
#(
  parameter int unsigned RW = 8,
  parameter int unsigned PL = 2
) (
  input  logic             clk,
  input  logic             req,
  input  logic             we,
  input  space_e           space,
  input  logic [RW-1:0]    idx,
  input  logic [ENT_W-1:0] wdata,
  output logic             ack,
  output logic [ENT_W-1:0] rdata,
  output int unsigned      n_ops
);
  logic [ENT_W-1:0] imt [1 << RW];
  logic [ENT_W-1:0] prt [1 << RW];

  initial begin
    ack = 1'b0; rdata = '0; n_ops = 0;
    for (int unsigned i = 0; i < (1 << RW); i++) begin
      imt[i] = ENT_W'(i << PL);
      prt[i] = ENT_W'(i);
    end
  end

  always @(posedge clk) begin
    ack <= req && !ack;
    if (req && !ack) begin
      n_ops++;
      if (we) begin
        if (space == SP_IMT) imt[idx] = wdata;
        else prt[idx] = wdata;
      end else rdata <= (space == SP_IMT) ? imt[idx] : prt[idx];
    end
  end
endmodule
