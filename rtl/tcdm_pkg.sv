// Shared types and constants of the burst-capable shared-L1 cluster.
//
// Default configuration: a 256-FPU cluster of 64 core complexes (one scalar
// core plus one 4-lane vector core each), 4 cores and 16 banks per tile,
// 4 tiles per group, 4 groups, and a response channel widened four times
// (grouping factor GF = 4).  Every TCDM request carries a burst length and
// the identity of the port that issued it; every response carries GF words.
// Struct widths depend on GF, the number of vector load/store lanes K and
// the reorder-buffer depth, so those three live here; topology sizes are
// module parameters so that testbenches can shrink them.
package tcdm_pkg;

  // Vector load/store lanes per core (K of MP_N Spatz_K).
  parameter int unsigned K = 4;
  // Grouping factor: words carried by one response beat.
  parameter int unsigned GF = 4;
  // Reorder-buffer entries per VLSU lane (doubled w.r.t. a non-burst design).
  parameter int unsigned RobDepth = 8;
  // Entries of the burst FIFO inside each burst manager.
  parameter int unsigned BurstFifoDepth = 4;

  // Default topology (MP64Spatz4).
  parameter int unsigned DefNumGroups        = 4;
  parameter int unsigned DefNumTilesPerGroup = 4;
  parameter int unsigned DefNumCoresPerTile  = 4;
  parameter int unsigned DefNumBanksPerTile  = 16;
  parameter int unsigned DefBankWords        = 256;  // 1 KiB of 32-bit words

  localparam int unsigned TagW = $clog2(RobDepth);
  localparam int unsigned LenW = $clog2(GF) + 1;   // burst length 1..GF

  typedef logic [31:0]     addr_t;
  typedef logic [31:0]     data_t;
  typedef logic [3:0]      strb_t;
  typedef logic [TagW-1:0] tag_t;
  typedef logic [LenW-1:0] len_t;

  // Lane number used by the scalar core's port.
  localparam logic [3:0] ScalarLane = 4'(K);

  // Who issued a request, and which reorder-buffer slots wait for its words.
  typedef struct packed {
    logic [3:0]        group;
    logic [3:0]        tile;
    logic [3:0]        core;
    logic [3:0]        lane;   // first lane of the burst, or ScalarLane
    len_t              blen;   // number of 32-bit words, 1 = narrow request
    tag_t [GF-1:0]     tags;   // ROB slot of lane (lane + k) for word k
  } meta_t;

  // A core-side (VLSU lane or scalar) memory request.
  typedef struct packed {
    addr_t addr;
    logic  we;
    data_t wdata;
    strb_t be;
  } core_req_t;

  typedef struct packed {
    addr_t addr;
    logic  we;
    data_t wdata;
    strb_t be;
    meta_t meta;
  } tcdm_req_t;

  typedef struct packed {
    data_t [GF-1:0] data;  // word k belongs to lane (meta.lane + k)
    meta_t          meta;
  } tcdm_rsp_t;

endpackage
