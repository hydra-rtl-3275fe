// hydra_pkg: types and constants shared by the HyDRA last-level-cache
// controller. It defines the request/response records that travel on the
// core side and the memory side of the LLC, the L-RPT entry format (valid
// bit plus two 2-bit cluster IDs, 5 bits per entry as in the description of
// the LERN reuse predictor table), and the reuse-threshold record that the
// Accelerator Progress Monitor hands to the bypass-decision logic.
// Fractional policy constants (alpha, beta, delta_A, delta_B, MR_Th,
// margins, T_A/T_B) are carried as integer percentages so that every
// comparison becomes an exact integer cross-multiplication; this encoding is
// a choice of this implementation.
package hydra_pkg;

  localparam int unsigned ADDR_W     = 40;   // physical address bits (assumed)
  localparam int unsigned LINE_BYTES = 64;   // 64 B block (Table I)
  localparam int unsigned LINE_W     = LINE_BYTES * 8;
  localparam int unsigned BLK_OFF    = 6;    // address >> 6 gives the block address
  localparam int unsigned NUM_CORES  = 8;    // eight cores (Table I)
  localparam int unsigned SRC_W      = 4;    // requester id: 0..7 cores, 8 = accelerator
  localparam int unsigned ID_W       = 8;    // requester transaction id (assumed)
  localparam int unsigned PC_W       = 32;   // PC carried with core reads for SHIP (assumed)

  localparam logic [SRC_W-1:0] SRC_ACCEL = SRC_W'(NUM_CORES);

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [LINE_W-1:0] line_t;

  // Request arriving at the LLC from the core-side interconnect.
  typedef struct packed {
    logic             write;   // 1: write / writeback of a full line, 0: read
    logic [SRC_W-1:0] src;     // requester
    logic [ID_W-1:0]  id;      // requester tag, echoed in the response
    logic [PC_W-1:0]  pc;      // PC of the missing core load (SHIP signature source)
    addr_t            addr;
    line_t            data;
  } llc_req_t;

  // Response to a requester (read data or write acknowledgement).
  typedef struct packed {
    logic             write;
    logic [SRC_W-1:0] src;
    logic [ID_W-1:0]  id;
    addr_t            addr;
    line_t            data;
  } llc_resp_t;

  // Memory-side request and response. `byp` marks a write sent on the
  // bypass request path; its acknowledgement returns on the bypass response
  // path without touching the LLC.
  typedef struct packed {
    logic             write;
    logic             byp;
    logic [SRC_W-1:0] src;
    logic [ID_W-1:0]  id;
    addr_t            addr;
    line_t            data;
  } mem_req_t;

  typedef struct packed {
    logic             write;
    logic             byp;
    logic [SRC_W-1:0] src;
    logic [ID_W-1:0]  id;
    addr_t            addr;
    line_t            data;
  } mem_resp_t;

  // Cluster IDs. RC: 0 Cold, 1 Light, 2 Moderate, 3 Hot.
  // RI: 0 Immediate, 1 Near, 2 Far, 3 Remote. An invalid entry is "No Reuse".
  typedef struct packed {
    logic       valid;
    logic [1:0] rc;
    logic [1:0] ri;
  } lrpt_entry_t;

  // Reuse thresholds, range -1..4, two's complement.
  typedef struct packed {
    logic signed [3:0] ri_th;
    logic signed [3:0] rc_th;
  } reuse_th_t;

  // Fig. 14 row 7: no bypass (RI_Th = 3, RC_Th = -1).
  localparam reuse_th_t TH_NO_BYPASS = '{ri_th: 4'sd3, rc_th: -4'sd1};

  // Event counters of the controller, exported for observation.
  typedef struct packed {
    logic [31:0] acc_wr_bypass;     // accelerator writes sent on bypass path 1
    logic [31:0] acc_wr_cached;     // accelerator writes sent to the LLC queue (path 2)
    logic [31:0] acc_rd_bypass;     // accelerator read responses bypassed (path 3)
    logic [31:0] acc_rd_miss;       // accelerator read misses sent to memory (paths 3 + 4)
    logic [31:0] acc_llc_hit;       // accelerator requests that hit in the LLC
    logic [31:0] core_rd_bypass;    // core read responses bypassed by SHIP
    logic [31:0] core_access;       // core LLC lookups
    logic [31:0] core_miss;         // core LLC misses
    logic [31:0] inv_hits;          // cached copies invalidated by bypassed writes
    logic [31:0] arp_core_waits;    // cycles a core request waited behind an accelerator one
  } hydra_stats_t;

  function automatic logic is_accel(input logic [SRC_W-1:0] s);
    return s == SRC_ACCEL;
  endfunction

endpackage
