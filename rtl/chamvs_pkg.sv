// chamvs_pkg: sizes and types shared by the ChamVS near-memory vector-search
// accelerator.
//
// The defaults describe one memory node in its main configuration: a SIFT-like
// IVF-PQ database with m = 16 PQ code bytes per vector, D = 128 dimensions
// (D* = 8 per sub-space), 256 centroids per sub-space, nlist = 32768 IVF lists,
// up to nprobe = 32 probed lists per query, K = 100 results, four DRAM channels,
// eight PQ decoding units with two level-1 queues each (16 queues) truncated to
// 20 entries. Those numbers follow the paper. The fixed-point widths, the
// 512-bit channel word and the field layout of the candidate record are this
// design's own choices.
//
// A candidate (cand_t) is what flows from the PQ decoding units through the
// priority queues to the ID fetch stage: its approximate distance, the unit
// that produced it (which fixes the DRAM channel) and the index of its 64-bit
// vector ID inside that channel's ID area. An empty queue slot holds
// distance = DIST_EMPTY; real distances can never reach that value (see
// lut_construct for the bound).
package chamvs_pkg;

  // PQ and dataset geometry
  localparam int unsigned M_BYTES    = 16;    // m: PQ code bytes per vector
  localparam int unsigned DSUB       = 8;     // D* = D / m
  localparam int unsigned NCODE      = 256;   // centroids per sub-space (8-bit codes)
  localparam int unsigned ELEM_W     = 8;     // signed fixed-point vector element
  localparam int unsigned NLIST      = 32768; // IVF lists
  localparam int unsigned NPROBE_MAX = 32;    // probed lists per query
  localparam int unsigned K_MAX      = 100;   // K nearest neighbours

  // Accelerator organisation
  localparam int unsigned N_CH       = 4;     // DRAM channels
  localparam int unsigned N_PQ       = 8;     // PQ decoding units
  localparam int unsigned L1_LEN     = 20;    // truncated level-1 queue length

  // Widths
  localparam int unsigned DIST_W     = 32;
  localparam int unsigned MEM_W      = 512;   // DRAM channel word
  localparam int unsigned ADDR_W     = 32;    // channel word address
  localparam int unsigned ID_W       = 64;    // vector ID (8 bytes, see Table 2 sizes)
  localparam int unsigned IDX_W      = ADDR_W + 3; // ID index: 8 IDs per 512-bit word
  localparam int unsigned CNT_W      = 24;    // vectors in one sub-list
  localparam int unsigned UNIT_W     = 4;
  localparam int unsigned QID_W      = 16;
  localparam int unsigned K_W        = 7;
  localparam int unsigned NPROBE_W   = 6;

  localparam logic [DIST_W-1:0] DIST_EMPTY = '1;

  typedef struct packed {
    logic [DIST_W-1:0] distance;
    logic [UNIT_W-1:0] unit;
    logic [IDX_W-1:0]  id_idx;
  } cand_t;

  localparam cand_t CAND_EMPTY = '{distance: DIST_EMPTY, unit: '0, id_idx: '0};

  // One PQ decoding unit's share of one IVF list: where its codes and IDs sit
  // in the unit's DRAM channel and how many vectors there are.
  typedef struct packed {
    logic [ADDR_W-1:0] code_base; // first 512-bit word of the PQ codes
    logic [IDX_W-1:0]  id_base;   // ID index of the first vector
    logic [CNT_W-1:0]  count;     // number of vectors
  } seg_t;

  // Result record leaving the accelerator (towards the network stack).
  typedef struct packed {
    logic [QID_W-1:0]  qid;
    logic [K_W-1:0]    rank;
    logic [DIST_W-1:0] distance;
    logic [ID_W-1:0]   id;
    logic              last;
  } result_t;

endpackage
