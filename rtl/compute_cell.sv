// compute_cell: one Compute Cell (CC) of the mesh, made of the three parts
// the paper draws: memory (cc_memory), logic (cc_logic) and network
// (mesh_router), plus the vicinity allocator that picks where this cell's
// ghost vertices go.
//
// Messages for this cell leave the router's local port into a task queue
// (TASKQ_DEPTH actions) that feeds the action engine; messages the engine
// stages go through an output queue (OUTQ_DEPTH) into the router's local
// input. The four mesh links (index 0..3 = north, south, east, west) are
// valid/ready channels of one LINK_W-bit flit each. The cell's coordinates
// come in on my_x/my_y, so every cell of the mesh is the same module.
// `active` is high when the cell holds or processes any message, the
// quantity the paper plots as "cells active". Queue depths and the debug
// read port are this design's choices.
module compute_cell
  import amcca_pkg::*;
#(
  parameter int unsigned MESH_X      = 32,
  parameter int unsigned MESH_Y      = 32,
  parameter int unsigned ROOT_SLOTS  = 16,
  parameter int unsigned GHOST_SLOTS = 16,
  parameter int unsigned TASKQ_DEPTH = 8,
  parameter int unsigned OUTQ_DEPTH  = 4,
  parameter int unsigned HOPS        = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic               bfs_en,
  input  logic [3:0]         link_in_valid,
  output logic [3:0]         link_in_ready,
  input  flit_t              link_in_flit  [4],
  output logic [3:0]         link_out_valid,
  input  logic [3:0]         link_out_ready,
  output flit_t              link_out_flit [4],
  input  logic [SLOT_W-1:0]  dbg_slot,
  output vobj_t              dbg_obj,
  output logic               active,
  output cc_events_t         ev
);
  // router
  logic [NPORTS-1:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  flit_t             r_in_flit [NPORTS];
  flit_t             r_out_flit[NPORTS];
  logic              r_busy;

  // queues and engine
  logic  tq_valid, tq_ready, tq_in_ready, oq_in_valid, oq_in_ready, oq_valid;
  msg_t  tq_msg, oq_in_msg, oq_msg;
  logic [$clog2(TASKQ_DEPTH+1)-1:0] tq_count;
  logic [$clog2(OUTQ_DEPTH+1)-1:0]  oq_count;
  logic  eng_busy;

  // memory
  logic [SLOT_W-1:0] rd_slot, wr_slot, alloc_slot;
  vobj_t             rd_obj, wr_obj;
  logic              wr_en, alloc_req, mem_full;

  // allocator
  logic              va_take;
  logic [COORD_W-1:0] va_x, va_y;

  for (genvar p = 0; p < 4; p++) begin : g_link
    assign r_in_valid[p]     = link_in_valid[p];
    assign link_in_ready[p]  = r_in_ready[p];
    assign r_in_flit[p]      = link_in_flit[p];
    assign link_out_valid[p] = r_out_valid[p];
    assign r_out_ready[p]    = link_out_ready[p];
    assign link_out_flit[p]  = r_out_flit[p];
  end
  assign r_in_valid[P_L]  = oq_valid;
  assign r_in_flit[P_L]   = msg2flit(oq_msg);
  assign r_out_ready[P_L] = tq_in_ready;

  mesh_router u_router (
    .clk, .rst_n, .my_x, .my_y,
    .in_valid (r_in_valid),  .in_ready (r_in_ready),  .in_flit (r_in_flit),
    .out_valid(r_out_valid), .out_ready(r_out_ready), .out_flit(r_out_flit),
    .busy     (r_busy)
  );

  msg_fifo #(.WIDTH(MSG_W), .DEPTH(TASKQ_DEPTH)) u_taskq (
    .clk, .rst_n,
    .in_valid (r_out_valid[P_L]), .in_ready (tq_in_ready),
    .in_data  (flit2msg(r_out_flit[P_L])),
    .out_valid(tq_valid), .out_ready(tq_ready), .out_data(tq_msg),
    .count    (tq_count)
  );

  msg_fifo #(.WIDTH(MSG_W), .DEPTH(OUTQ_DEPTH)) u_outq (
    .clk, .rst_n,
    .in_valid (oq_in_valid), .in_ready (oq_in_ready), .in_data (oq_in_msg),
    .out_valid(oq_valid), .out_ready(r_in_ready[P_L]), .out_data(oq_msg),
    .count    (oq_count)
  );

  cc_logic #(.MESH_X(MESH_X), .MESH_Y(MESH_Y)) u_logic (
    .clk, .rst_n, .my_x, .my_y, .bfs_en,
    .in_valid (tq_valid), .in_ready (tq_ready), .in_msg (tq_msg),
    .out_valid(oq_in_valid), .out_ready(oq_in_ready), .out_msg(oq_in_msg),
    .rd_slot, .rd_obj, .wr_en, .wr_slot, .wr_obj,
    .alloc_req, .mem_full, .alloc_slot,
    .va_take, .va_x, .va_y,
    .busy (eng_busy), .ev
  );

  cc_memory #(.ROOT_SLOTS(ROOT_SLOTS), .GHOST_SLOTS(GHOST_SLOTS)) u_mem (
    .clk, .rst_n,
    .rd_slot, .rd_obj, .wr_en, .wr_slot, .wr_obj,
    .alloc_req, .full (mem_full), .alloc_slot,
    .dbg_slot, .dbg_obj
  );

  vicinity_allocator #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .HOPS(HOPS)) u_vicinity (
    .clk, .rst_n, .my_x, .my_y,
    .take (va_take), .target_x (va_x), .target_y (va_y)
  );

  assign active = eng_busy || r_busy || (tq_count != '0) || (oq_count != '0);
endmodule
