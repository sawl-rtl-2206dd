// imt_access: single-entry access to the Integrated Mapping Table (IMT) and to
// the physical-region owner table (PRT), both kept in reserved NVM/DRAM space
// packed K entries per translation line.
//
// Entry idx lives in translation line idx / K, slot idx % K (entries are kept
// in ascending logical-region order, so logical region 6k+m is slot m of line
// k). IMT translation lines are reached through the GTD (gtd.sv, instanced
// here), which turns the logical translation line into its physical place.
// PRT lines are addressed directly. A write is a read-modify-write of the
// whole translation line.
//
// Interface: the client raises req with we/space/idx/wdata and holds them
// until ack, a one-cycle pulse; on reads rdata is valid with ack. The line
// port tl_* follows the same req/ack rule towards memory. tl_addr carries the
// space in its top bit. Latency: 2 cycles plus one line read, plus one line
// write for a write.
module imt_access
  import sawl_pkg::*;
#(
  parameter int unsigned IDX_W = LRN_W,
  parameter int unsigned NTL   = N_TL,
  parameter int unsigned TA_W  = TLMA_W
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic               ready,      // GTD initialised
  input  logic               req,
  input  logic               we,
  input  space_e             space,
  input  logic [IDX_W-1:0]   idx,
  input  logic [ENT_W-1:0]   wdata,
  output logic               ack,
  output logic [ENT_W-1:0]   rdata,
  output logic               tl_req,
  output logic               tl_we,
  output logic [TA_W:0]      tl_addr,
  output logic [TL_W-1:0]    tl_wdata,
  input  logic               tl_ack,
  input  logic [TL_W-1:0]    tl_rdata,
  input  logic               gtd_upd_we,
  input  logic [TA_W-1:0]    gtd_upd_tlma,
  input  logic [TA_W-1:0]    gtd_upd_tpma
);
  typedef enum logic [2:0] {S_IDLE, S_GTD, S_RD, S_WR, S_ACK} state_e;
  state_e            st;
  logic              we_q;
  space_e            sp_q;
  logic [TA_W-1:0]   tl_q;
  logic [2:0]        slot_q;
  logic [ENT_W-1:0]  wd_q;
  logic [TL_W-1:0]   line_q;
  logic [TA_W-1:0]   tpma;

  gtd #(.N(NTL), .ADDR_W(TA_W)) u_gtd (
    .clk, .rst_n, .init_done(ready),
    .rd_tlma(tl_q), .rd_tpma(tpma),
    .upd_we(gtd_upd_we), .upd_tlma(gtd_upd_tlma), .upd_tpma(gtd_upd_tpma)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      we_q   <= 1'b0;
      sp_q   <= SP_IMT;
      tl_q   <= '0;
      slot_q <= '0;
      wd_q   <= '0;
      line_q <= '0;
      rdata  <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (req && ready) begin
          we_q   <= we;
          sp_q   <= space;
          tl_q   <= TA_W'(idx / IDX_W'(K));
          slot_q <= 3'(idx % IDX_W'(K));
          wd_q   <= wdata;
          st     <= S_GTD;
        end
        S_GTD: st <= S_RD;
        S_RD: if (tl_ack) begin
          line_q <= tl_rdata;
          rdata  <= tl_rdata[slot_q*ENT_W +: ENT_W];
          st     <= we_q ? S_WR : S_ACK;
        end
        S_WR: if (tl_ack) st <= S_ACK;
        S_ACK: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    tl_req   = (st == S_RD) || (st == S_WR);
    tl_we    = (st == S_WR);
    tl_addr  = (sp_q == SP_IMT) ? {1'b0, tpma} : {1'b1, tl_q};
    tl_wdata = line_q;
    tl_wdata[slot_q*ENT_W +: ENT_W] = wd_q;
    ack      = (st == S_ACK);
  end
endmodule
