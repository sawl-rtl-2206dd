// line_mover: moves the lines of two equally sized logical regions to a new
// placement, through a line buffer in the memory controller.
//
// This is the read-out / shift / write-back sequence used by the region
// exchange and the region merge. Region r (r = 0, 1) has 2^q_lg lines; its
// logical line o currently sits at physical line dold_r ^ o. Phase 1 reads all
// 2 * 2^q_lg lines into the buffer in logical order. Phase 2 writes logical
// line o of region r to dnew_r ^ (o + r * 2^q_lg * roff1). With roff1 = 0 the
// regions stay separate (exchange: each gets a new place and key); with
// roff1 = 1 region 1 becomes the upper half of one region twice the size
// (merge; then dnew0 = dnew1). The caller guarantees that the set of lines
// written equals the set read, so no line is lost.
//
// Interface: start (taken when idle) with the mapping inputs, which must stay
// stable until done; done pulses one cycle. The mem_* port is a req/ack line
// port; each line costs one access. Total: 4 * 2^q_lg accesses.
module line_mover
  import sawl_pkg::*;
#(
  parameter int unsigned AW    = LA_W,
  parameter int unsigned LW    = LINE_W,
  parameter int unsigned QMAXL = P_LG + MAX_LVL   // log2 of the largest region
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [LVL_W:0]   q_lg,
  input  logic [AW-1:0]    dold0,
  input  logic [AW-1:0]    dold1,
  input  logic [AW-1:0]    dnew0,
  input  logic [AW-1:0]    dnew1,
  input  logic             roff1,
  output logic             busy,
  output logic             done,
  output logic             mem_req,
  output logic             mem_we,
  output logic [AW-1:0]    mem_addr,
  output logic [LW-1:0]    mem_wdata,
  input  logic             mem_ack,
  input  logic [LW-1:0]    mem_rdata
);
  localparam int unsigned NB = 2 << QMAXL;
  localparam int unsigned IW = QMAXL + 1;
  typedef enum logic [1:0] {M_IDLE, M_READ, M_WRITE, M_DONE} state_e;
  state_e          st;
  logic [IW-1:0]   i_q;
  logic [LW-1:0]   buffer [NB];

  logic            r;
  logic [AW-1:0]   o, qlines, last;

  always_comb begin
    qlines = AW'(1) << q_lg;
    r      = ((AW'(i_q) >> q_lg) & AW'(1)) != '0;
    o      = AW'(i_q) & (qlines - 1'b1);
    last   = (qlines << 1) - 1'b1;
    mem_req   = (st == M_READ) || (st == M_WRITE);
    mem_we    = (st == M_WRITE);
    if (st == M_READ) mem_addr = (r ? dold1 : dold0) ^ o;
    else              mem_addr = (r ? dnew1 : dnew0) ^ (o | ((r && roff1) ? qlines : '0));
    mem_wdata = buffer[i_q];
    busy      = (st != M_IDLE);
    done      = (st == M_DONE);
  end

  always_ff @(posedge clk) if (st == M_READ && mem_ack) buffer[i_q] <= mem_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st  <= M_IDLE;
      i_q <= '0;
    end else begin
      unique case (st)
        M_IDLE: if (start) begin
          i_q <= '0;
          st  <= M_READ;
        end
        M_READ: if (mem_ack) begin
          if (AW'(i_q) == last) begin
            i_q <= '0;
            st  <= M_WRITE;
          end else i_q <= i_q + 1'b1;
        end
        M_WRITE: if (mem_ack) begin
          if (AW'(i_q) == last) st <= M_DONE;
          else i_q <= i_q + 1'b1;
        end
        M_DONE: st <= M_IDLE;
        default: st <= M_IDLE;
      endcase
    end
  end
endmodule
