// amcca_chip: the AM-CCA chip, a MESH_X x MESH_Y mesh of compute cells with
// an IO channel along the top edge and one along the bottom edge.
//
// Every compute cell links to its four neighbours; a message moves one hop
// per cycle under YX dimension-ordered routing. The IO cell of column x in
// the top channel drives the north link of cell (x, 0); the one in the bottom
// channel drives the south link of cell (x, MESH_Y-1). The host loads
// records into either channel, raises `start`, and the IO cells inject one
// action each per cycle. The graph lives in the cells' memories: vertex v of
// the host's numbering is the root object at some (x, y, slot) the host
// chose. `bfs_en` selects streaming ingestion with BFS (high) or ingestion
// only (low). The host watches `active_cells` (cells holding or processing a
// message, the paper's activity plots) and `quiescent` (nothing left
// anywhere) to know when an increment is done, and reads any object through
// the debug port `dbg_addr`/`dbg_obj` (combinational). `ev_any` ORs each
// cell's event flags per cycle. The mesh size and link width follow the
// paper (32 x 32, 256 bits); memory and queue sizes are this design's.
// Links leaving the mesh at the east and west edges and the unused north
// and south outputs never carry a flit, because every address lies inside
// the mesh; an assertion checks this.
module amcca_chip
  import amcca_pkg::*;
#(
  parameter int unsigned MESH_X       = 32,
  parameter int unsigned MESH_Y       = 32,
  parameter int unsigned ROOT_SLOTS   = 16,
  parameter int unsigned GHOST_SLOTS  = 16,
  parameter int unsigned TASKQ_DEPTH  = 8,
  parameter int unsigned OUTQ_DEPTH   = 4,
  parameter int unsigned HOPS         = 2,
  parameter int unsigned IO_BUF_DEPTH = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            bfs_en,
  // host stream into the top (0) and bottom (1) IO channel
  input  logic [1:0]      host_valid,
  output logic [1:0]      host_ready,
  input  io_rec_t         host_rec [2],
  // status
  output logic [$clog2(MESH_X*MESH_Y+1)-1:0] active_cells,
  output logic            quiescent,
  output cc_events_t      ev_any,
  output logic [31:0]     io_sent,
  // debug read of one object
  input  gaddr_t          dbg_addr,
  output vobj_t           dbg_obj
);
  localparam int unsigned NCELL = MESH_X * MESH_Y;
  localparam int unsigned XIW   = MESH_X > 1 ? $clog2(MESH_X) : 1;   // column index width
  localparam int unsigned YIW   = MESH_Y > 1 ? $clog2(MESH_Y) : 1;   // row index width

  // Per-cell link signals, index 0..3 = north, south, east, west.
  logic [3:0]  li_valid [MESH_Y][MESH_X];
  logic [3:0]  li_ready [MESH_Y][MESH_X];
  flit_t       li_flit  [MESH_Y][MESH_X][4];
  logic [3:0]  lo_valid [MESH_Y][MESH_X];
  logic [3:0]  lo_ready [MESH_Y][MESH_X];
  flit_t       lo_flit  [MESH_Y][MESH_X][4];
  vobj_t       c_dbg    [MESH_Y][MESH_X];
  logic [NCELL-1:0] c_active;
  cc_events_t  c_ev     [NCELL];

  // IO channels
  logic [MESH_X-1:0] io_valid [2];
  logic [MESH_X-1:0] io_ready [2];
  flit_t             io_flit  [2][MESH_X];
  logic [1:0]        io_empty;
  logic [31:0]       io_cnt   [2];

  for (genvar ch = 0; ch < 2; ch++) begin : g_io
    io_channel #(.NCELLS(MESH_X), .BUF_DEPTH(IO_BUF_DEPTH)) u_ioch (
      .clk, .rst_n, .start,
      .host_valid(host_valid[ch]), .host_ready(host_ready[ch]), .host_rec(host_rec[ch]),
      .out_valid (io_valid[ch]), .out_ready(io_ready[ch]), .out_flit(io_flit[ch]),
      .empty     (io_empty[ch]), .sent(io_cnt[ch])
    );
  end
  assign io_sent = io_cnt[0] + io_cnt[1];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_row
    for (genvar x = 0; x < MESH_X; x++) begin : g_col
      // north input: from the cell above, or from the top IO cell
      if (y > 0) begin : g_n
        assign li_valid[y][x][0] = lo_valid[y-1][x][1];
        assign li_flit [y][x][0] = lo_flit [y-1][x][1];
        assign lo_ready[y][x][0] = li_ready[y-1][x][1];
      end else begin : g_n_io
        assign li_valid[y][x][0] = io_valid[0][x];
        assign li_flit [y][x][0] = io_flit[0][x];
        assign io_ready[0][x]      = li_ready[y][x][0];
        assign lo_ready[y][x][0] = 1'b1;
      end
      // south input: from the cell below, or from the bottom IO cell
      if (y < MESH_Y - 1) begin : g_s
        assign li_valid[y][x][1] = lo_valid[y+1][x][0];
        assign li_flit [y][x][1] = lo_flit [y+1][x][0];
        assign lo_ready[y][x][1] = li_ready[y+1][x][0];
      end else begin : g_s_io
        assign li_valid[y][x][1] = io_valid[1][x];
        assign li_flit [y][x][1] = io_flit[1][x];
        assign io_ready[1][x]      = li_ready[y][x][1];
        assign lo_ready[y][x][1] = 1'b1;
      end
      // east input: from the cell to the right
      if (x < MESH_X - 1) begin : g_e
        assign li_valid[y][x][2] = lo_valid[y][x+1][3];
        assign li_flit [y][x][2] = lo_flit [y][x+1][3];
        assign lo_ready[y][x][2] = li_ready[y][x+1][3];
      end else begin : g_e_edge
        assign li_valid[y][x][2] = 1'b0;
        assign li_flit [y][x][2] = '0;
        assign lo_ready[y][x][2] = 1'b1;
      end
      // west input: from the cell to the left
      if (x > 0) begin : g_w
        assign li_valid[y][x][3] = lo_valid[y][x-1][2];
        assign li_flit [y][x][3] = lo_flit [y][x-1][2];
        assign lo_ready[y][x][3] = li_ready[y][x-1][2];
      end else begin : g_w_edge
        assign li_valid[y][x][3] = 1'b0;
        assign li_flit [y][x][3] = '0;
        assign lo_ready[y][x][3] = 1'b1;
      end

      compute_cell #(
        .MESH_X(MESH_X), .MESH_Y(MESH_Y), .ROOT_SLOTS(ROOT_SLOTS),
        .GHOST_SLOTS(GHOST_SLOTS), .TASKQ_DEPTH(TASKQ_DEPTH),
        .OUTQ_DEPTH(OUTQ_DEPTH), .HOPS(HOPS)
      ) u_cc (
        .clk, .rst_n,
        .my_x          (COORD_W'(x)),
        .my_y          (COORD_W'(y)),
        .bfs_en,
        .link_in_valid (li_valid[y][x]),
        .link_in_ready (li_ready[y][x]),
        .link_in_flit  (li_flit[y][x]),
        .link_out_valid(lo_valid[y][x]),
        .link_out_ready(lo_ready[y][x]),
        .link_out_flit (lo_flit[y][x]),
        .dbg_slot      (dbg_addr.slot),
        .dbg_obj       (c_dbg[y][x]),
        .active        (c_active[y*MESH_X+x]),
        .ev            (c_ev[y*MESH_X+x])
      );

      // No flit leaves the mesh: every destination lies inside it.
      a_no_exit_n: assert property (@(posedge clk) disable iff (!rst_n)
        (y == 0) |-> !lo_valid[y][x][0]);
      a_no_exit_s: assert property (@(posedge clk) disable iff (!rst_n)
        (y == MESH_Y - 1) |-> !lo_valid[y][x][1]);
      a_no_exit_e: assert property (@(posedge clk) disable iff (!rst_n)
        (x == MESH_X - 1) |-> !lo_valid[y][x][2]);
      a_no_exit_w: assert property (@(posedge clk) disable iff (!rst_n)
        (x == 0) |-> !lo_valid[y][x][3]);
    end
  end

  always_comb begin
    active_cells = '0;
    ev_any       = '0;
    for (int i = 0; i < NCELL; i++) begin
      active_cells = active_cells + c_active[i];
      ev_any       = ev_any | c_ev[i];
    end
  end
  assign quiescent = (c_active == '0) && (&io_empty) && (host_valid == '0);

  assign dbg_obj = (int'(dbg_addr.x) < MESH_X && int'(dbg_addr.y) < MESH_Y)
                 ? c_dbg[YIW'(dbg_addr.y)][XIW'(dbg_addr.x)] : vobj_empty();
endmodule
