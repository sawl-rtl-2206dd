// sawl_pkg: constants shared by the self-adaptive wear-leveling (SAWL) controller.
//
// Memory geometry follows the 64 GB MLC NVM system used throughout the
// evaluation: 256M memory lines (2^28), an initial wear-leveling granularity
// P of 4 lines and K = 6 mapping entries per translation line. The mapping
// entry "address information" D is log2(M) bits wide: the physical region
// number in its upper bits and the XOR key in its lower log2(Q) bits, so the
// physical line of a logical line lma is simply D ^ (lma mod Q).
// The observation window, settling window, sampling period and hit-rate
// thresholds are the trained values reported for the design. The merge
// depth limit, entry and line widths are choices of this implementation.
package sawl_pkg;
  localparam int unsigned LA_W     = 28;          // line address bits, M = 2^28 lines
  localparam int unsigned P_LG     = 2;           // log2 of initial granularity P = 4 lines
  localparam int unsigned LRN_W    = LA_W - P_LG; // logical region number bits
  localparam int unsigned K        = 6;           // IMT entries per translation line
  localparam int unsigned ENT_W    = 32;          // stored width of one IMT/PRT entry slot
  localparam int unsigned TL_W     = K * ENT_W;   // used bits of a translation line
  localparam int unsigned N_TL     = ((1 << LRN_W) + K - 1) / K; // translation lines of the IMT
  localparam int unsigned TLMA_W   = $clog2(N_TL);
  localparam int unsigned MAX_LVL  = 4;           // Q can grow up to P << MAX_LVL lines
  localparam int unsigned LVL_W    = 3;
  localparam int unsigned LINE_W   = 2048;        // 256-byte memory line
  localparam int unsigned CMT_N    = 131072;      // 1 MB CMT / 8-byte entry
  localparam int unsigned SOW      = 1 << 22;     // observation window (requests)
  localparam int unsigned SSW      = 1 << 22;     // settling window (requests)
  localparam int unsigned SAMPLE   = 100000;      // hit rate sampled every SAMPLE requests
  localparam int unsigned LOW_PCT  = 90;          // merge below this hit rate
  localparam int unsigned HIGH_PCT = 95;          // split above this hit rate
  localparam int unsigned SKEW_PCT = 99;          // one CMT half holds >= 99 % of the hits
  localparam int unsigned SWAP_PERIOD = 128;      // writes between two region exchanges

  // Space select on the translation-line port.
  typedef enum logic [0:0] {SP_IMT = 1'b0, SP_PRT = 1'b1} space_e;
endpackage
