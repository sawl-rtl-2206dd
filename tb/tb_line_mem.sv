// tb_line_mem: behavioural model of the NVM data lines for testbenches.
// A sparse line store with a req/ack port answering one cycle after each
// request. A line never written reads as init_line(addr), a pattern made
// from its address, so a testbench can predict the initial contents.
module tb_line_mem #(
  parameter int unsigned AW = 10,
  parameter int unsigned LW = 32
) (
  input  logic          clk,
  input  logic          req,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [LW-1:0] wdata,
  output logic          ack,
  output logic [LW-1:0] rdata,
  output int unsigned   n_reads,
  output int unsigned   n_writes
);
  logic [LW-1:0] store [logic [AW-1:0]];

  function automatic logic [LW-1:0] init_line(input logic [AW-1:0] a);
    logic [LW-1:0] v;
    for (int unsigned i = 0; i < LW; i += 32) v[i +: 32] = 32'hA5000000 ^ 32'(a) ^ (i << 16);
    return v;
  endfunction

  initial begin ack = 1'b0; rdata = '0; n_reads = 0; n_writes = 0; end

  always @(posedge clk) begin
    ack <= req && !ack;
    if (req && !ack) begin
      if (we) begin store[addr] = wdata; n_writes++; end
      else begin
        rdata <= store.exists(addr) ? store[addr] : init_line(addr);
        n_reads++;
      end
    end
  end
endmodule
