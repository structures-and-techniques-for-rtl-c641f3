// amcca_pkg: types and constants shared by the compute-cell mesh.
//
// A global address names an object (a root vertex or a ghost vertex) as the
// (x, y) coordinate of the compute cell (CC) that stores it plus a slot in
// that CC's memory. Messages are active messages ("actions"): an action code,
// the target object, one address argument and one level argument. A message
// travels in a single flit of LINK_W bits; the unused upper bits are zero.
// The 256-bit link width follows the paper; every field width, the action
// encoding and the object layout are this design's own choices.
package amcca_pkg;

  // Link width of the mesh channels (paper: 256-bit links, one flit per message).
  localparam int unsigned LINK_W     = 256;
  // Coordinate and slot widths: room for meshes up to 64x64 and 256 slots per CC.
  localparam int unsigned COORD_W    = 6;
  localparam int unsigned SLOT_W     = 8;
  // BFS level width; the all-ones value stands for "not reached".
  localparam int unsigned LVL_W      = 16;
  // Edges held locally by one vertex object before a ghost is needed.
  localparam int unsigned EDGE_SLOTS = 4;
  // Closures a pending future can hold.
  localparam int unsigned FUTURE_Q   = 4;

  typedef logic [LVL_W-1:0] level_t;
  localparam level_t LEVEL_INF = '1;

  typedef struct packed {
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] x;
    logic [SLOT_W-1:0]  slot;
  } gaddr_t;

  typedef enum logic [2:0] {
    ACT_NOP        = 3'd0,
    ACT_INSERT     = 3'd1,  // insert-edge-action: add edge arg to object dst
    ACT_BFS        = 3'd2,  // bfs-action: offer level to object dst
    ACT_ALLOCATE   = 3'd3,  // allocate system action: new ghost, reply to arg
    ACT_SET_FUTURE = 3'd4   // return trigger of allocate: ghost address in arg
  } action_e;

  typedef struct packed {
    action_e act;
    gaddr_t  dst;
    gaddr_t  arg;
    level_t  level;
  } msg_t;

  localparam int unsigned MSG_W = $bits(msg_t);

  typedef logic [LINK_W-1:0] flit_t;

  // State of a future LCO (Fig. 6: null, pending, set).
  typedef enum logic [1:0] {
    FUT_NULL    = 2'd0,
    FUT_PENDING = 2'd1,
    FUT_SET     = 2'd2
  } fut_state_e;

  typedef struct packed {
    fut_state_e                      state;
    gaddr_t                          value;
    logic [$clog2(FUTURE_Q+1)-1:0]   qcnt;
    gaddr_t [FUTURE_Q-1:0]           closures;  // queued edge targets waiting for the value
  } future_t;

  // One vertex object of an RPVO: a root vertex or a ghost vertex.
  typedef struct packed {
    level_t                            level;
    logic [$clog2(EDGE_SLOTS+1)-1:0]   ecnt;
    gaddr_t [EDGE_SLOTS-1:0]           edges;
    future_t                           ghost;
  } vobj_t;

  // Router ports.
  typedef enum logic [2:0] {
    P_N = 3'd0, P_S = 3'd1, P_E = 3'd2, P_W = 3'd3, P_L = 3'd4
  } port_e;
  localparam int unsigned NPORTS = 5;

  function automatic flit_t msg2flit(msg_t m);
    flit_t f;
    f = '0;
    f[MSG_W-1:0] = m;
    return f;
  endfunction

  function automatic msg_t flit2msg(flit_t f);
    return msg_t'(f[MSG_W-1:0]);
  endfunction

  function automatic vobj_t vobj_empty();
    vobj_t o;
    o = '0;
    o.level = LEVEL_INF;
    o.ghost.state = FUT_NULL;
    return o;
  endfunction

  // One record streamed in by the host: an edge (src -> dst) to insert, or,
  // with seed set, a BFS source vertex src given level 0.
  typedef struct packed {
    logic   seed;
    gaddr_t src;
    gaddr_t dst;
  } io_rec_t;

  // Events a compute cell reports, one bit each, for activity statistics.
  typedef struct packed {
    logic insert;        // an insert-edge action stored an edge locally
    logic bfs_improve;   // a bfs-action lowered a level and diffused
    logic alloc_req;     // an allocate action was sent for a new ghost
    logic alloc_done;    // a ghost was allocated here
    logic alloc_fwd;     // memory full: allocate passed to another cell
    logic fut_enqueue;   // a closure was queued on a pending future
    logic fut_drain;     // a set future released its queued closures
    logic ghost_fwd;     // an insert was forwarded to a set ghost
    logic requeue;       // future queue full: action sent back to itself
    logic emit_stall;    // the engine waited for room to stage a message
  } cc_events_t;

endpackage
