// mcts_pkg -- constants, types and helper functions shared by the MCTS in-tree
// operations accelerator.
//
// The accelerator keeps the Upper Confidence-bounded Tree (UCT) of a
// tree-parallel Monte-Carlo Tree Search in on-chip memory. Node entries hold
// two expansion counters; every edge holds its uct weight, the sum of the
// rewards backed up through it, its visit count and the number of virtual
// losses still outstanding on it.
//
// Defaults follow the paper's Atari-Pong configuration (fanout F = 6, tree
// height limit D = 9, p = 128 workers, 16 fractional bits for the uct value).
// The field widths below are this design's own choice; they are upper bounds
// shared by every module, and modules check their parameters against them.
package mcts_pkg;

  // ---- configuration defaults (paper values) --------------------------------
  localparam int unsigned F_DEF = 6;    // tree fanout (Pong action space)
  localparam int unsigned D_DEF = 9;    // tree height limit
  localparam int unsigned P_DEF = 128;  // number of workers
  localparam int unsigned CLUT_F_DEF = 6; // inputs of one comparison look-up table
  localparam int unsigned FRAC = 16;    // fractional bits of uct, rewards, sums

  // ---- field widths (design choice, upper bounds) ---------------------------
  localparam int unsigned UW   = 32;    // uct weight, signed Q15.16
  localparam int unsigned RW   = 32;    // reward, signed Q15.16
  localparam int unsigned WW   = 48;    // reward sum, signed Q31.16
  localparam int unsigned NW   = 16;    // visit count, holds X = 56K
  localparam int unsigned OW   = 8;     // outstanding virtual losses, holds p = 128
  localparam int unsigned SW   = 6;     // child slot / counter, F <= 63
  localparam int unsigned WIDW = 8;     // worker id, p <= 256
  localparam int unsigned DW   = 4;     // tree depth, D <= 15
  localparam int unsigned IXW  = 32;    // node index / position / bank address

  // Default exploration constant beta = sqrt(2) and virtual loss 0.1, Q16.
  localparam logic [UW-1:0] BETA_DEF = 32'd92682;
  localparam logic [UW-1:0] VL_DEF   = 32'd6554;

  // Largest and smallest uct weights. Unvisited edges start at UCT_MAX so
  // that every child is tried once before any is revisited.
  localparam logic signed [UW-1:0] UCT_MAX = {1'b0, {(UW-1){1'b1}}};
  localparam logic signed [UW-1:0] UCT_MIN = {1'b1, {(UW-1){1'b0}}};

  typedef logic signed [UW-1:0] uct_t;
  typedef logic signed [RW-1:0] reward_t;

  // One edge (s, s_hat) of the UCT.
  typedef struct packed {
    logic signed [UW-1:0] uct;  // edge weight compared in Selection
    logic signed [WW-1:0] w;    // sum of rewards backed up through the edge
    logic [NW-1:0]        n;    // visit count N_s_hat
    logic [OW-1:0]        o;    // virtual losses applied and not yet recovered
  } edge_t;
  localparam int unsigned EDGE_W = $bits(edge_t);

  // Expansion counters of one node entry. A node is a leaf while fewer than
  // F children are inserted; claims hand out distinct children to workers
  // in the same iteration before the insertions happen.
  typedef struct packed {
    logic [SW-1:0] ins;  // children inserted
    logic [SW-1:0] clm;  // children claimed by workers
  } cnt_t;

  // A worker travelling through the pipelines.
  typedef struct packed {
    logic [WIDW-1:0] wid;    // worker number j, also its buffer index
    logic [DW-1:0]   depth;  // depth of the current node s (root = 0)
    logic [IXW-1:0]  pos;    // position of s among all nodes of its depth
    logic [IXW-1:0]  addr;   // entry address of s in its sub-tree bank
    logic            done;   // Selection finished, s is the selected node
    logic            xv;     // an expansion s' was claimed
    logic [SW-1:0]   xslot;  // child slot of s' under s
  } token_t;
  localparam int unsigned TOK_W = $bits(token_t);

  // Result handed to the host for worker wid: selected node s and expanded
  // node s' as node indices, plus the number of edges traversed below the root.
  typedef struct packed {
    logic [WIDW-1:0] wid;
    logic [IXW-1:0]  s;
    logic [IXW-1:0]  sx;
    logic            xv;
    logic [DW-1:0]   depth;
  } result_t;
  localparam int unsigned RES_W = $bits(result_t);

  // Commands of the accelerator.
  typedef enum logic [1:0] {
    CMD_ITER  = 2'd0,  // BackUp of the previous iteration (if any), Selection, Node Insertion
    CMD_FLUSH = 2'd1   // BackUp outstanding workers, then Tree Flush
  } cmd_e;

  // Phase of the accelerator; selects which unit drives the memory banks.
  typedef enum logic [2:0] {
    PH_IDLE  = 3'd0,
    PH_BU    = 3'd1,   // BackUp
    PH_SEL   = 3'd2,   // Selection
    PH_INS   = 3'd3,   // Node Insertion
    PH_OUT   = 3'd4,   // node indices streamed to the host
    PH_FLUSH = 3'd5    // Tree Flush (also run once after reset)
  } phase_e;

  // A pending node insertion: child slot `slot` of entry `addr` at depth `depth`.
  typedef struct packed {
    logic [DW-1:0]  depth;
    logic [IXW-1:0] addr;
    logic [SW-1:0]  slot;
  } ins_req_t;

  // F**k (64-bit).
  function automatic longint unsigned fpow(input int unsigned f, input int unsigned k);
    longint unsigned r;
    r = 1;
    for (int unsigned i = 0; i < k; i++) r = r * f;
    return r;
  endfunction

  // Node index in breadth-first order of the full F-ary tree: the root is 0,
  // the nodes of depth d are numbered (F**d-1)/(F-1) + pos.
  function automatic logic [IXW-1:0] node_index(input int unsigned f,
                                                input logic [DW-1:0] depth,
                                                input logic [IXW-1:0] pos);
    longint unsigned base;
    longint unsigned pw;
    base = 0;
    pw = 1;
    for (int unsigned d = 0; d < (1 << DW); d++) begin
      if (d < int'(depth)) begin
        base = base + pw;
        pw = pw * f;
      end
    end
    return IXW'(base + longint'(pos));
  endfunction

endpackage
