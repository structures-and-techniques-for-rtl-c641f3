// cc_memory: the scratchpad memory of a compute cell, organised as vertex
// objects.
//
// Each slot holds one object of a Recursively Parallel Vertex Object (RPVO):
// a root vertex or a ghost vertex. An object carries its BFS level, a local
// edge list of EDGE_SLOTS edges, and the future that holds the address of its
// ghost (see amcca_pkg::vobj_t). Slots 0..ROOT_SLOTS-1 hold root vertices, put
// in place by the host before edges stream in; they come out of reset as
// empty vertices (level "not reached", no edges, null ghost). Slots
// ROOT_SLOTS..ROOT_SLOTS+GHOST_SLOTS-1 form a pool handed out, one per
// `alloc_req`, by a bump pointer; the granted slot is cleared in the same
// clock edge. `full` says the pool is used up. Reads are combinational on
// two ports (one for the action engine, one for the host's debug view);
// writes take effect at the clock edge. The paper gives the contents of a
// vertex object only in outline; slot counts, the root/ghost split and the
// bump allocator are this design's choices, and the memory is written as an
// array rather than an SRAM macro.
module cc_memory
  import amcca_pkg::*;
#(
  parameter int unsigned ROOT_SLOTS  = 16,
  parameter int unsigned GHOST_SLOTS = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [SLOT_W-1:0] rd_slot,
  output vobj_t             rd_obj,
  input  logic              wr_en,
  input  logic [SLOT_W-1:0] wr_slot,
  input  vobj_t             wr_obj,
  input  logic              alloc_req,
  output logic              full,
  output logic [SLOT_W-1:0] alloc_slot,
  input  logic [SLOT_W-1:0] dbg_slot,
  output vobj_t             dbg_obj
);
  localparam int unsigned SLOTS = ROOT_SLOTS + GHOST_SLOTS;
  localparam int unsigned IW    = (SLOTS > 1) ? $clog2(SLOTS) : 1;

  vobj_t             mem [SLOTS];
  logic [SLOT_W:0]   next_free;

  assign full       = (next_free >= (SLOT_W+1)'(SLOTS));
  assign alloc_slot = next_free[SLOT_W-1:0];
  assign rd_obj     = (int'(rd_slot)  < SLOTS) ? mem[IW'(rd_slot)]  : vobj_empty();
  assign dbg_obj    = (int'(dbg_slot) < SLOTS) ? mem[IW'(dbg_slot)] : vobj_empty();

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_free <= (SLOT_W+1)'(ROOT_SLOTS);
      for (int i = 0; i < SLOTS; i++) mem[i] <= vobj_empty();
    end else begin
      if (wr_en && int'(wr_slot) < SLOTS) mem[IW'(wr_slot)] <= wr_obj;
      if (alloc_req && !full) begin
        mem[IW'(alloc_slot)] <= vobj_empty();
        next_free       <= next_free + 1'b1;
      end
    end
  end

  // The engine never writes an object and allocates one in the same cycle,
  // and never allocates from a full pool.
  a_one_port: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && alloc_req));
  a_no_over:  assert property (@(posedge clk) disable iff (!rst_n) alloc_req |-> !full);
endmodule
