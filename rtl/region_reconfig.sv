// region_reconfig: region-split and region-merge (the region split/merge module).
//
// A region is 2^lvl aligned initial regions (Q = P << lvl lines) whose IMT
// entries all hold the same address information D; logical line lma of the
// region sits at physical line D ^ (lma mod Q).
//
// Split (split_go): the region is halved without moving data. Because the
// mapping is an XOR, each half already occupies one contiguous half of the
// physical block: the lower half keeps D, the upper half gets
// D ^ (Q/2) - in region-number/key terms, the old key's top bit moves into
// the region number and the remaining key bits stay the key. Only the upper
// half's IMT entries and the owner table (PRT) entries of its physical block
// are rewritten, then the CMT entry is invalidated.
//
// Merge (merge_go): region A is merged with its aligned logical buddy B of the
// same size into one region of size 2Q, placed in the 2Q-aligned physical block
// T that holds A. The other half H of T belongs to some region C, looked up in
// the PRT. If B is not already in H, B and C swap physical places first (C
// takes B's old block); then A and B are read out and rewritten into T under a
// new random 2Q-line key, and all 2^(lvl+1) IMT entries get the new D. The
// merge is refused (counted in refused) when A is at the largest size, or B or
// C is not a whole region of A's size.
//
// The target region comes from the caller (the top uses the most recently used
// CMT entry). Interface: merge_go/split_go pulses with tgt_* when idle; busy
// stays high until the operation is over. imt_*, mem_* and cmt_inv_* are the
// same ports as on data_exchange. Random keys come from a 32-bit Galois LFSR.
module region_reconfig
  import sawl_pkg::*;
#(
  parameter int unsigned AW   = LA_W,
  parameter int unsigned PL   = P_LG,
  parameter int unsigned LW   = LINE_W,
  parameter int unsigned MAXL = MAX_LVL
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               merge_go,
  input  logic               split_go,
  input  logic [AW-PL-1:0]   tgt_lrn,
  input  logic [LVL_W-1:0]   tgt_lvl,
  input  logic [AW-1:0]      tgt_d,
  output logic               busy,
  output logic [31:0]        merges,
  output logic [31:0]        splits,
  output logic [31:0]        refused,
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

  typedef enum logic [4:0] {
    R_IDLE, R_READ, R_CHK, R_WLOOP, R_MOVE, R_INV,
    // split
    S_PRT, S_INV,
    // merge
    G_GOTB, G_BOK, G_GOTC, G_COK, G_MV1, G_CIMT, G_CPRT, G_CINV, G_MV2,
    G_MIMT, G_MPRT, G_MINV
  } state_e;

  state_e           st, ret_st;
  logic [31:0]      lfsr;
  logic             is_merge;
  logic [RW-1:0]    a_q, b_q, c_q;
  logic [LVL_W-1:0] lvl_q;
  logic [AW-1:0]    da_q, db_q, dc_q, dn_q;
  // generic read / check / write-loop / move registers
  logic [RW-1:0]    rd_idx, lp_base, lp_data, lp_n, lp_j, ck_base;
  logic [AW-1:0]    lp_d, ck_d;
  space_e           rd_sp, lp_sp;
  logic [LVL_W-1:0] ck_k;
  logic [ENT_W-1:0] rd_val;
  logic [LVL_W:0]   mv_qlg;
  logic [AW-1:0]    mv_o0, mv_o1, mv_n0, mv_n1;
  logic             mv_roff, mv_start, mv_busy, mv_done;
  logic             lp_isd;    // loop writes D (IMT) or lrn (PRT)

  logic [AW-1:0] qlines, qm, pa, hh, tt, pb;
  always_comb begin
    qlines = AW'(1) << (PL + 32'(lvl_q));
    qm     = qlines - 1'b1;
    pa     = da_q & ~qm;
    hh     = pa ^ qlines;
    tt     = pa & ~((qlines << 1) - 1'b1);
    pb     = db_q & ~qm;
  end

  line_mover #(.AW(AW), .LW(LW), .QMAXL(PL + MAXL)) u_mv (
    .clk, .rst_n, .start(mv_start), .q_lg(mv_qlg),
    .dold0(mv_o0), .dold1(mv_o1), .dnew0(mv_n0), .dnew1(mv_n1), .roff1(mv_roff),
    .busy(mv_busy), .done(mv_done),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ack, .mem_rdata
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= R_IDLE; ret_st <= R_IDLE; lfsr <= 32'hACE1_0001; is_merge <= 1'b0;
      a_q <= '0; b_q <= '0; c_q <= '0; lvl_q <= '0;
      da_q <= '0; db_q <= '0; dc_q <= '0; dn_q <= '0;
      rd_idx <= '0; lp_base <= '0; lp_data <= '0; lp_n <= '0; lp_j <= '0; ck_base <= '0;
      lp_d <= '0; ck_d <= '0; rd_sp <= SP_IMT; lp_sp <= SP_IMT; ck_k <= '0; rd_val <= '0;
      mv_qlg <= '0; mv_o0 <= '0; mv_o1 <= '0; mv_n0 <= '0; mv_n1 <= '0; mv_roff <= 1'b0;
      lp_isd <= 1'b0; merges <= '0; splits <= '0; refused <= '0;
    end else begin
      lfsr <= {1'b0, lfsr[31:1]} ^ (lfsr[0] ? 32'h8020_0003 : 32'h0);
      unique case (st)
        R_IDLE: begin
          a_q <= tgt_lrn; lvl_q <= tgt_lvl; da_q <= tgt_d;
          if (split_go) begin
            is_merge <= 1'b0;
            if (tgt_lvl == '0) refused <= refused + 1;
            else begin
              // upper half entries get D ^ (Q/2)
              lp_base <= tgt_lrn | (RW'(1) << (tgt_lvl - 1'b1));
              lp_n    <= RW'(1) << (tgt_lvl - 1'b1);
              lp_d    <= tgt_d ^ (AW'(1) << (PL + 32'(tgt_lvl) - 1));
              dn_q    <= tgt_d ^ (AW'(1) << (PL + 32'(tgt_lvl) - 1));
              lp_sp   <= SP_IMT; lp_isd <= 1'b1; lp_j <= '0;
              st <= R_WLOOP; ret_st <= S_PRT;
            end
          end else if (merge_go) begin
            is_merge <= 1'b1;
            if (tgt_lvl >= LVL_W'(MAXL)) refused <= refused + 1;
            else begin
              b_q    <= tgt_lrn ^ (RW'(1) << tgt_lvl);
              rd_idx <= tgt_lrn ^ (RW'(1) << tgt_lvl);
              rd_sp  <= SP_IMT;
              st <= R_READ; ret_st <= G_GOTB;
            end
          end
        end
        // ---- generic single entry read
        R_READ: if (imt_ack) begin rd_val <= imt_rdata; st <= ret_st; end
        // ---- generic level check: entries ck_base ^ 2^k, k < lvl, equal ck_d
        R_CHK: begin
          if (ck_k == lvl_q) st <= ret_st;
          else if (imt_ack) begin
            if (AW'(imt_rdata) != ck_d) begin refused <= refused + 1; st <= R_IDLE; end
            else ck_k <= ck_k + 1'b1;
          end
        end
        // ---- generic write loop of lp_n entries starting at lp_base
        R_WLOOP: if (imt_ack) begin
          if (lp_j == lp_n - 1'b1) st <= ret_st;
          else lp_j <= lp_j + 1'b1;
        end
        R_MOVE: if (mv_done) st <= ret_st;
        R_INV:  st <= ret_st;
        // ---- split: owner table of the upper half's physical block
        S_PRT: begin
          lp_base <= RW'(dn_q >> PL) & ~(lp_n - 1'b1);
          lp_data <= a_q | lp_n;
          lp_sp <= SP_PRT; lp_isd <= 1'b0; lp_j <= '0;
          st <= R_WLOOP; ret_st <= S_INV;
        end
        S_INV: begin splits <= splits + 1; st <= R_IDLE; end
        // ---- merge
        G_GOTB: begin
          db_q <= AW'(rd_val);
          ck_base <= b_q; ck_d <= AW'(rd_val); ck_k <= '0;
          st <= R_CHK; ret_st <= G_BOK;
        end
        G_BOK: begin
          if (pb == hh) begin
            st <= G_MV2;
          end else begin
            rd_idx <= RW'(hh >> PL); rd_sp <= SP_PRT;
            st <= R_READ; ret_st <= G_GOTC;
          end
        end
        G_GOTC: begin
          c_q <= RW'(rd_val);
          rd_idx <= RW'(rd_val); rd_sp <= SP_IMT;
          st <= R_READ; ret_st <= G_COK;
        end
        G_COK: begin
          dc_q <= AW'(rd_val);
          if (((c_q & ((RW'(1) << lvl_q) - 1'b1)) != '0) || ((AW'(rd_val) & ~qm) != hh)) begin
            refused <= refused + 1; st <= R_IDLE;
          end else begin
            ck_base <= c_q; ck_d <= AW'(rd_val); ck_k <= '0;
            st <= R_CHK; ret_st <= G_MV1;
          end
        end
        G_MV1: begin   // B goes to H, C goes to B's old block, keys kept
          mv_qlg <= (LVL_W+1)'(PL) + (LVL_W+1)'(lvl_q);
          mv_o0 <= db_q; mv_n0 <= hh | (db_q & qm);
          mv_o1 <= dc_q; mv_n1 <= pb | (dc_q & qm);
          mv_roff <= 1'b0;
          st <= R_MOVE; ret_st <= G_CIMT;
        end
        G_CIMT: begin
          db_q <= hh | (db_q & qm);
          lp_base <= c_q; lp_n <= RW'(1) << lvl_q; lp_d <= pb | (dc_q & qm);
          lp_sp <= SP_IMT; lp_isd <= 1'b1; lp_j <= '0;
          st <= R_WLOOP; ret_st <= G_CPRT;
        end
        G_CPRT: begin
          lp_base <= RW'((lp_d & ~qm) >> PL); lp_data <= c_q;   // B's old block, now C's
          lp_sp <= SP_PRT; lp_isd <= 1'b0; lp_j <= '0;
          st <= R_WLOOP; ret_st <= G_CINV;
        end
        G_CINV: begin st <= R_INV; ret_st <= G_MV2; end
        G_MV2: begin   // A and B into block T under a new 2Q-line key
          dn_q   <= tt | (AW'(lfsr) & ((qlines << 1) - 1'b1));
          mv_qlg <= (LVL_W+1)'(PL) + (LVL_W+1)'(lvl_q);
          mv_o0  <= (a_q < b_q) ? da_q : db_q;
          mv_o1  <= (a_q < b_q) ? db_q : da_q;
          mv_n0  <= tt | (AW'(lfsr) & ((qlines << 1) - 1'b1));
          mv_n1  <= tt | (AW'(lfsr) & ((qlines << 1) - 1'b1));
          mv_roff <= 1'b1;
          st <= R_MOVE; ret_st <= G_MIMT;
        end
        G_MIMT: begin
          lp_base <= a_q & ~(RW'(1) << lvl_q); lp_n <= RW'(2) << lvl_q; lp_d <= dn_q;
          lp_sp <= SP_IMT; lp_isd <= 1'b1; lp_j <= '0;
          st <= R_WLOOP; ret_st <= G_MPRT;
        end
        G_MPRT: begin
          lp_base <= RW'(tt >> PL); lp_data <= a_q & ~(RW'(1) << lvl_q);
          lp_sp <= SP_PRT; lp_isd <= 1'b0; lp_j <= '0;
          st <= R_WLOOP; ret_st <= G_MINV;
        end
        G_MINV: begin merges <= merges + 1; st <= R_IDLE; end
        default: st <= R_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (st != R_IDLE);
    mv_start  = (st == R_MOVE) && !mv_busy;
    imt_req   = (st == R_READ) || (st == R_WLOOP) || ((st == R_CHK) && (ck_k != lvl_q));
    imt_we    = (st == R_WLOOP);
    imt_space = SP_IMT;
    imt_idx   = rd_idx;
    imt_wdata = '0;
    unique case (st)
      R_READ:  imt_space = rd_sp;
      R_CHK:   imt_idx   = ck_base ^ (RW'(1) << ck_k);
      R_WLOOP: begin
        imt_space = lp_sp;
        imt_idx   = lp_base | lp_j;
        imt_wdata = lp_isd ? ENT_W'(lp_d) : ENT_W'(lp_data);
      end
      default: ;
    endcase
    // CMT invalidations: split -> whole old region; merge -> C, then A+B
    cmt_inv_valid = (st == S_INV) || (st == R_INV) || (st == G_MINV);
    cmt_inv_lrn   = (st == R_INV) ? c_q : (is_merge ? (a_q & ~(RW'(1) << lvl_q)) : a_q);
    cmt_inv_lvl   = (st == G_MINV) ? lvl_q + 1'b1 : lvl_q;
  end
endmodule
