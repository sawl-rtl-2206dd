// data_exchange: PCM-S style region exchange (the data exchange module).
//
// Every SWAP_PERIOD-th data write (the swapping period) triggers an exchange
// of the region just written, X, with a randomly chosen logical region Y of
// the same size: both regions are read into the controller, each is written
// back at the other's physical place under a fresh random XOR key, and all
// IMT entries of both regions and the owner-table (PRT) entries of both
// physical blocks are rewritten. The CMT entries of both regions are then
// invalidated so the next access refetches them. Y is picked aligned to the
// size of X; if its region has a different size (because of merges/splits) the
// exchange is skipped and counted in skipped.
//
// Random numbers come from a 32-bit Galois LFSR advanced on every cycle.
// Interface: wr_valid with the written region (base lrn, level, D) from the
// translator; busy is high from the triggering write until the exchange is
// finished. imt_* goes to imt_access, mem_* to the data-line port, cmt_inv_*
// to the CMT. Cost: 2 + 2^lvl entry reads, 4 * Q line accesses and
// 4 * 2^lvl entry writes.
module data_exchange
  import sawl_pkg::*;
#(
  parameter int unsigned AW     = LA_W,
  parameter int unsigned PL     = P_LG,
  parameter int unsigned LW     = LINE_W,
  parameter int unsigned MAXL   = MAX_LVL,
  parameter int unsigned PERIOD = SWAP_PERIOD
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_valid,
  input  logic [AW-PL-1:0]   wr_lrn,
  input  logic [LVL_W-1:0]   wr_lvl,
  input  logic [AW-1:0]      wr_d,
  output logic               busy,
  output logic [31:0]        exchanges,
  output logic [31:0]        skipped,
  output logic               imt_req,
  output logic               imt_we,
  output space_e             imt_space,
  output logic [AW-PL-1:0]   imt_idx,
  output logic [ENT_W-1:0]   imt_wdata,
  input  logic               imt_ack,
  input  logic [ENT_W-1:0]   imt_rdata,
  output logic               mem_req,
  output logic               mem_we,
  output logic [AW-1:0]      mem_addr,
  output logic [LW-1:0]      mem_wdata,
  input  logic               mem_ack,
  input  logic [LW-1:0]      mem_rdata,
  output logic               cmt_inv_valid,
  output logic [AW-PL-1:0]   cmt_inv_lrn,
  output logic [LVL_W-1:0]   cmt_inv_lvl
);
  localparam int unsigned RW = AW - PL;
  localparam int unsigned CW = (PERIOD > 1) ? $clog2(PERIOD) : 1;
  typedef enum logic [3:0] {X_IDLE, X_RDY, X_CHK, X_KEYS, X_MOVE, X_IMTW, X_PRTW,
                            X_INV1, X_INV2} state_e;
  state_e            st;
  logic [CW-1:0]     cnt;
  logic [31:0]       lfsr;
  logic [RW-1:0]     x_q, y_q;
  logic [LVL_W-1:0]  lvl_q;
  logic [AW-1:0]     dx_q, dy_q, dnx_q, dny_q;
  logic [RW:0]       j_q;          // entry/chunk counter over both regions
  logic              mv_start, mv_busy, mv_done;

  logic [RW-1:0] nent, emask, rnd_y, j_lo, chk_idx, pbx, pby;
  logic [AW-1:0] qm;
  logic          j_hi;
  always_comb begin
    nent  = RW'(1) << lvl_q;
    emask = nent - 1'b1;
    qm    = (AW'(1) << (PL + 32'(lvl_q))) - 1'b1;
    rnd_y = RW'(lfsr) & ~((RW'(1) << wr_lvl) - 1'b1);
    j_hi  = |(j_q & ((RW+1)'(1) << lvl_q));
    j_lo  = RW'(j_q) & emask;
    chk_idx = (j_q[LVL_W-1:0] == lvl_q) ? (y_q ^ nent) : (y_q ^ (RW'(1) << j_q[LVL_W-1:0]));
    pbx   = RW'(dnx_q >> PL) & ~emask;
    pby   = RW'(dny_q >> PL) & ~emask;
  end

  line_mover #(.AW(AW), .LW(LW), .QMAXL(PL + MAXL)) u_mv (
    .clk, .rst_n, .start(mv_start), .q_lg((LVL_W+1)'(PL) + (LVL_W+1)'(lvl_q)),
    .dold0(dx_q), .dold1(dy_q), .dnew0(dnx_q), .dnew1(dny_q), .roff1(1'b0),
    .busy(mv_busy), .done(mv_done),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ack, .mem_rdata
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= X_IDLE; cnt <= '0; lfsr <= 32'h1; x_q <= '0; y_q <= '0; lvl_q <= '0;
      dx_q <= '0; dy_q <= '0; dnx_q <= '0; dny_q <= '0; j_q <= '0;
      exchanges <= '0; skipped <= '0;
    end else begin
      lfsr <= {1'b0, lfsr[31:1]} ^ (lfsr[0] ? 32'h8020_0003 : 32'h0);
      unique case (st)
        X_IDLE: if (wr_valid) begin
          if (cnt == CW'(PERIOD - 1)) begin
            cnt   <= '0;
            x_q   <= wr_lrn;
            lvl_q <= wr_lvl;
            dx_q  <= wr_d;
            y_q   <= (rnd_y == wr_lrn) ? (wr_lrn ^ (RW'(1) << wr_lvl)) : rnd_y;
            st    <= X_RDY;
          end else cnt <= cnt + 1'b1;
        end
        X_RDY: if (imt_ack) begin
          dy_q <= AW'(imt_rdata);
          j_q  <= '0;
          st   <= (lvl_q < LVL_W'(MAXL) || lvl_q != 0) ? X_CHK : X_KEYS;
        end
        X_CHK: if (imt_ack) begin
          // entries below the level must match, the buddy at the level must not
          if (j_q[LVL_W-1:0] == lvl_q) begin
            if (AW'(imt_rdata) == dy_q) begin skipped <= skipped + 1; st <= X_IDLE; end
            else st <= X_KEYS;
          end else if (AW'(imt_rdata) != dy_q) begin
            skipped <= skipped + 1; st <= X_IDLE;
          end else if (j_q[LVL_W-1:0] + 1'b1 == lvl_q && lvl_q == LVL_W'(MAXL)) st <= X_KEYS;
          else j_q <= j_q + 1'b1;
        end
        X_KEYS: begin
          dnx_q <= (dy_q & ~qm) | (AW'(lfsr) & qm);
          dny_q <= (dx_q & ~qm) | (AW'(lfsr >> 7) & qm);
          st    <= X_MOVE;
        end
        X_MOVE: if (mv_done) begin j_q <= '0; st <= X_IMTW; end
        X_IMTW: if (imt_ack) begin
          if (j_q == (RW+1)'(2) * (RW+1)'(nent) - 1'b1) begin j_q <= '0; st <= X_PRTW; end
          else j_q <= j_q + 1'b1;
        end
        X_PRTW: if (imt_ack) begin
          if (j_q == (RW+1)'(2) * (RW+1)'(nent) - 1'b1) st <= X_INV1;
          else j_q <= j_q + 1'b1;
        end
        X_INV1: st <= X_INV2;
        X_INV2: begin exchanges <= exchanges + 1; st <= X_IDLE; end
        default: st <= X_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (st != X_IDLE);
    mv_start  = (st == X_KEYS);
    imt_req   = (st == X_RDY) || (st == X_CHK) || (st == X_IMTW) || (st == X_PRTW);
    imt_we    = (st == X_IMTW) || (st == X_PRTW);
    imt_space = (st == X_PRTW) ? SP_PRT : SP_IMT;
    imt_idx   = y_q;
    imt_wdata = '0;
    unique case (st)
      X_CHK:  imt_idx = chk_idx;
      X_IMTW: begin
        imt_idx   = (j_hi ? y_q : x_q) | j_lo;
        imt_wdata = ENT_W'(j_hi ? dny_q : dnx_q);
      end
      X_PRTW: begin
        imt_idx   = (j_hi ? pby : pbx) | j_lo;
        imt_wdata = ENT_W'(j_hi ? y_q : x_q);
      end
      default: ;
    endcase
    cmt_inv_valid = (st == X_INV1) || (st == X_INV2);
    cmt_inv_lrn   = (st == X_INV2) ? y_q : x_q;
    cmt_inv_lvl   = lvl_q;
  end

  // the line mover is started only while it is idle
  a_mover_idle: assert property (@(posedge clk) mv_start |-> !mv_busy);
endmodule
