// addr_translator: logical-to-physical line address translation.
//
// Runs the translation workflow of the design for one request at a time:
//   1. lrn = lma / P (the IMT entry index; its translation line is lrn / K,
//      found by imt_access),
//   2. look lrn up in the CMT; on a hit take the granularity level and D,
//   3/4. on a miss read IMT entry lrn (through the GTD) to get D, then find
//      the real granularity Q by reading the entries of neighbouring regions:
//      for k = 0, 1, ... the entry lrn ^ 2^k belongs to the same (merged)
//      region exactly when it holds the same D, because merged regions are
//      aligned buddies and distinct regions never share D. The first k whose
//      buddy differs is the level (Q = P << k, at most P << MAX_LVL). The new
//      entry is inserted at the top of the CMT stack,
//   5-7. pma = prn * Q + (lao xor key) with prn = D / Q, key = D % Q and
//      lao = lma % Q; as Q is a power of two this is D ^ (lma mod Q).
// Latency: a hit finishes 2 cycles after the request is taken; a miss costs
// one IMT entry read plus one read per level probed.
//
// Interface: req_valid/req_lma is taken when ready; done pulses for one cycle
// with pma, hit, first (hit in first half of the LRU stack) and the region it
// belongs to (base lrn, level, D). The cmt_* and imt_* ports connect to cmt
// and to the read side of imt_access.
module addr_translator
  import sawl_pkg::*;
#(
  parameter int unsigned AW   = LA_W,
  parameter int unsigned PL   = P_LG,
  parameter int unsigned MAXL = MAX_LVL
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  input  logic [AW-1:0]      req_lma,
  output logic               ready,
  output logic               done,
  output logic [AW-1:0]      done_pma,
  output logic               done_hit,
  output logic               done_first,
  output logic [AW-PL-1:0]   done_lrn,
  output logic [LVL_W-1:0]   done_lvl,
  output logic [AW-1:0]      done_d,
  output logic [AW-PL-1:0]   cmt_lk_lrn,
  input  logic               cmt_lk_hit,
  input  logic [LVL_W-1:0]   cmt_lk_lvl,
  input  logic [AW-1:0]      cmt_lk_d,
  input  logic               cmt_lk_first,
  output logic               cmt_touch,
  output logic               cmt_ins_valid,
  output logic [AW-PL-1:0]   cmt_ins_lrn,
  output logic [LVL_W-1:0]   cmt_ins_lvl,
  output logic [AW-1:0]      cmt_ins_d,
  output logic               imt_req,
  output logic [AW-PL-1:0]   imt_idx,
  input  logic               imt_ack,
  input  logic [ENT_W-1:0]   imt_rdata
);
  localparam int unsigned RW = AW - PL;
  typedef enum logic [2:0] {T_IDLE, T_LOOK, T_FETCH, T_PROBE, T_INS, T_DONE} state_e;
  state_e           st;
  logic [AW-1:0]    lma_q, d_q;
  logic [RW-1:0]    lrn_q;
  logic [LVL_W-1:0] lvl_q, k_q;
  logic             hit_q, first_q;

  function automatic logic [RW-1:0] lvl_mask(input logic [LVL_W-1:0] l);
    return (RW'(1) << l) - RW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; lma_q <= '0; d_q <= '0; lrn_q <= '0; lvl_q <= '0;
      k_q <= '0; hit_q <= 1'b0; first_q <= 1'b0;
    end else begin
      unique case (st)
        T_IDLE: if (req_valid) begin
          lma_q <= req_lma;
          lrn_q <= RW'(req_lma >> PL);
          st    <= T_LOOK;
        end
        T_LOOK: if (cmt_lk_hit) begin
          hit_q   <= 1'b1;
          first_q <= cmt_lk_first;
          lvl_q   <= cmt_lk_lvl;
          d_q     <= cmt_lk_d;
          st      <= T_DONE;
        end else begin
          hit_q   <= 1'b0;
          first_q <= 1'b0;
          st      <= T_FETCH;
        end
        T_FETCH: if (imt_ack) begin
          d_q <= AW'(imt_rdata);
          k_q <= '0;
          if (MAXL == 0) begin
            lvl_q <= '0;
            st    <= T_INS;
          end else st <= T_PROBE;
        end
        T_PROBE: if (imt_ack) begin
          if (AW'(imt_rdata) == d_q && k_q + 1'b1 < LVL_W'(MAXL)) k_q <= k_q + 1'b1;
          else begin
            lvl_q <= (AW'(imt_rdata) == d_q) ? LVL_W'(MAXL) : k_q;
            st    <= T_INS;
          end
        end
        T_INS:  st <= T_DONE;
        T_DONE: st <= T_IDLE;
        default: st <= T_IDLE;
      endcase
    end
  end

  always_comb begin
    ready         = (st == T_IDLE);
    cmt_lk_lrn    = lrn_q;
    cmt_touch     = (st == T_LOOK) && cmt_lk_hit;
    cmt_ins_valid = (st == T_INS);
    cmt_ins_lrn   = lrn_q & ~lvl_mask(lvl_q);
    cmt_ins_lvl   = lvl_q;
    cmt_ins_d     = d_q;
    imt_req       = (st == T_FETCH) || (st == T_PROBE);
    imt_idx       = (st == T_PROBE) ? (lrn_q ^ (RW'(1) << k_q)) : lrn_q;
    done          = (st == T_DONE);
    done_pma      = d_q ^ (lma_q & ((AW'(1) << (PL + 32'(lvl_q))) - AW'(1)));
    done_hit      = hit_q;
    done_first    = first_q;
    done_lrn      = lrn_q & ~lvl_mask(lvl_q);
    done_lvl      = lvl_q;
    done_d        = d_q;
  end
endmodule
