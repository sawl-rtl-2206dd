// tb_tl_mem: behavioural model of the reserved space holding translation
// lines (IMT lines at {0,line}, owner-table lines at {1,line}). Entries are
// packed K per line, ENT_W bits each. Lines never written hold the initial
// identity mapping: IMT entry i = i << PL (region i at physical region i,
// key 0) and owner-table entry i = i. One-cycle req/ack port.
module tb_tl_mem #(
  parameter int unsigned TA_W  = 8,
  parameter int unsigned PL    = 2,
  parameter int unsigned K     = 6,
  parameter int unsigned ENT_W = 32
) (
  input  logic              clk,
  input  logic              req,
  input  logic              we,
  input  logic [TA_W:0]     addr,
  input  logic [K*ENT_W-1:0] wdata,
  output logic              ack,
  output logic [K*ENT_W-1:0] rdata
);
  logic [K*ENT_W-1:0] store [logic [TA_W:0]];

  function automatic logic [K*ENT_W-1:0] init_line(input logic [TA_W:0] a);
    logic [K*ENT_W-1:0] v;
    for (int unsigned s = 0; s < K; s++) begin
      longint unsigned idx;
      idx = longint'(a[TA_W-1:0]) * K + longint'(s);
      v[s*ENT_W +: ENT_W] = a[TA_W] ? ENT_W'(idx) : ENT_W'(idx << PL);
    end
    return v;
  endfunction

  initial begin ack = 1'b0; rdata = '0; end

  always @(posedge clk) begin
    ack <= req && !ack;
    if (req && !ack) begin
      if (we) store[addr] = wdata;
      else rdata <= store.exists(addr) ? store[addr] : init_line(addr);
    end
  end
endmodule
