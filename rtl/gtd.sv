// gtd: Global Translation Directory.
//
// On-chip SRAM that maps the logical address of each translation line (tlma)
// to the physical translation line (tpma) currently holding it in the
// reserved NVM space. Translation lines are wear-levelled separately from data
// lines, which is why this indirection exists; the algorithm that moves them
// is not specified, so moves are written in from outside through the update
// port (upd_*).
//
// After reset the table is filled with the identity mapping tpma = tlma, one
// entry per clock; init_done rises when the sweep is over. Reads are
// synchronous: rd_tlma sampled at a clock edge gives rd_tpma after that edge.
// An update and a read of the same entry in one cycle return the old value.
module gtd #(
  parameter int unsigned N      = sawl_pkg::N_TL,
  parameter int unsigned ADDR_W = sawl_pkg::TLMA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              init_done,
  input  logic [ADDR_W-1:0] rd_tlma,
  output logic [ADDR_W-1:0] rd_tpma,
  input  logic              upd_we,
  input  logic [ADDR_W-1:0] upd_tlma,
  input  logic [ADDR_W-1:0] upd_tpma
);
  logic [ADDR_W-1:0] mem [N];
  logic [ADDR_W-1:0] init_ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_ptr  <= '0;
      init_done <= 1'b0;
    end else if (!init_done) begin
      init_ptr <= init_ptr + 1'b1;
      if (init_ptr == ADDR_W'(N - 1)) init_done <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!init_done) mem[init_ptr] <= init_ptr;
    else if (upd_we) mem[upd_tlma] <= upd_tpma;
    rd_tpma <= mem[rd_tlma];
  end
endmodule
