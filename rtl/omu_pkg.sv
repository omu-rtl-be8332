// omu_pkg: types and constants shared by the occupancy-map accelerator.
//
// The map is an octree of depth 16 addressed by 16-bit integer voxel keys per
// axis. Every stored node is one 64-bit word (layout as published for this
// architecture): [63:32] pointer to the row that holds the node's eight
// children (child i sits in bank i of that row), [31:16] a 2-bit status tag
// per child (child i in bits 2i+1:2i), [15:0] the node's fixed-point log-odds.
// Status codes 00 unknown, 01 occupied, 10 free, 11 inner node also follow
// the published data structure. The log-odds fixed-point format (signed, 10
// fractional bits) and the default sensor-model constants are this design's
// choice; the defaults are the usual OctoMap values (hit 0.7, miss 0.4,
// clamping 0.12/0.97) converted to that format.
package omu_pkg;

  localparam int unsigned TREE_DEPTH = 16;   // octree depth, leaves at depth 16
  localparam int unsigned KEY_W      = 16;   // key bits per axis
  localparam int unsigned N_PE       = 8;    // one PE per first-level branch
  localparam int unsigned N_BANK     = 8;    // one bank per child position
  localparam int unsigned PROB_W     = 16;
  localparam int unsigned PTR_W      = 32;
  localparam int unsigned WORD_W     = 64;
  localparam int unsigned PROB_FRAC  = 10;   // fractional bits of log-odds

  typedef logic signed [PROB_W-1:0] prob_t;

  // Sensor-model defaults in Q5.10 log-odds.
  localparam prob_t HIT_DEFAULT       = 16'sd867;    // log(0.7/0.3)   = 0.847
  localparam prob_t MISS_DEFAULT      = -16'sd415;   // log(0.4/0.6)   = -0.405
  localparam prob_t CLAMP_MIN_DEFAULT = -16'sd2040;  // log(0.12/0.88) = -1.992
  localparam prob_t CLAMP_MAX_DEFAULT = 16'sd3560;   // log(0.97/0.03) = 3.476
  localparam prob_t OCC_THR_DEFAULT   = 16'sd0;      // p >= 0.5 is occupied
  localparam prob_t FREE_THR_DEFAULT  = -16'sd1;     // p <  0.5 is free

  typedef enum logic [1:0] {
    ST_UNKNOWN  = 2'b00,
    ST_OCCUPIED = 2'b01,
    ST_FREE     = 2'b10,
    ST_INNER    = 2'b11
  } status_e;

  typedef struct packed {
    logic [PTR_W-1:0]  ptr;   // [63:32]
    logic [15:0]       tags;  // [31:16]
    prob_t             prob;  // [15:0]
  } node_t;

  typedef struct packed {
    logic [KEY_W-1:0] z;
    logic [KEY_W-1:0] y;
    logic [KEY_W-1:0] x;
  } key_t;

  typedef struct packed {
    key_t key;
    logic occupied;           // 1: hit (occupied), 0: miss (free)
  } voxel_t;

  typedef struct packed {
    prob_t hit;
    prob_t miss;
    prob_t clamp_min;
    prob_t clamp_max;
    prob_t occ_thr;
    prob_t free_thr;
  } cfg_t;

  typedef struct packed {
    logic    found;           // a node exists on the key's path
    prob_t   prob;            // log-odds of the deepest node on the path
  } qresp_t;

  // Memory operations of one PE step (see addr_gen).
  typedef enum logic [2:0] {
    AG_IDLE, AG_ROOT_RD, AG_ROOT_WR, AG_DESC_RD, AG_ASC_RD, AG_EXPAND, AG_CHILD_WR
  } ag_op_e;

  // Occupancy status a leaf takes from its log-odds (threshold 0.5).
  function automatic status_e leaf_status(prob_t p);
    return (p >= 0) ? ST_OCCUPIED : ST_FREE;
  endfunction

endpackage
