// cc_logic: the action engine of a compute cell. It executes the actions
// (active messages) that arrive for objects stored in this cell's memory.
//
// The paper's cell performs, each cycle, either one computing step of an
// action or the creation and staging of one new message. This engine keeps
// that rate: in IDLE it takes one action from the task queue and executes it
// in a single cycle (read the object, update it, write it back), building the
// list of messages the action propagates; in EMIT it stages one of them per
// cycle into the output queue, waiting while the queue is full. The actions:
//   INSERT(dst, arg=edge target, level)  insert-edge-action. The edge goes in
//       the object's local edge list if there is room. Otherwise it waits on
//       the ghost future: set -> the insert is forwarded to the ghost; null ->
//       the future turns pending, the edge is queued as a closure and an
//       ALLOCATE is sent to a cell chosen by the vicinity allocator; pending
//       -> the edge is queued; queue full -> the action is parked in a
//       retry buffer of this engine and executed again later. With BFS enabled, a stored edge propagates
//       BFS(target, level+1) when the object has a level. A forwarded insert
//       carries the parent's level; if that is lower, the object takes it and
//       diffuses like a BFS action.
//   BFS(dst, level)  bfs-action. If level is lower than the object's level,
//       the object takes it and sends BFS(edge, level+1) along every local
//       edge and BFS(ghost, level) to its ghost when the ghost is set, so the
//       whole RPVO shares one level.
//   ALLOCATE(dst=this cell, arg=requesting object)  the allocate system
//       action. A ghost slot is taken from the memory pool and SET_FUTURE(arg,
//       new address) is sent back as the return trigger (the continuation).
//       If the pool is empty the request is passed to another cell.
//   SET_FUTURE(dst, arg=ghost address)  sets the future; the queued closures
//       are then released one per cycle as INSERT(ghost, edge, level), each
//       release removing the closure from the queue (Fig. 6, steps 3 and 4).
// Parked actions: the retry buffer (RETRY_DEPTH actions) is served in turn
// with the task queue, so a SET_FUTURE waiting in the task queue always gets
// through. An action from the task queue that would need parking while the
// retry buffer is full is left in the task queue for a later cycle; a
// parked action that is still blocked goes back to the buffer's tail. The
// engine thus cannot block, but a cell stalls for good if more inserts wait
// on full futures than the retry buffer holds while the SET_FUTURE they need
// sits behind one of them in the task queue.
// `bfs_en` low gives the paper's ingestion-only experiment: inserts then do
// not start BFS actions. The paper runs these actions as software on the
// cell; a fixed-function engine, the single-cycle execute step, the message
// fields and the retry and forward rules for full queues and pools are this
// design's own.
module cc_logic
  import amcca_pkg::*;
#(
  parameter int unsigned MESH_X = 32,
  parameter int unsigned MESH_Y = 32,
  parameter int unsigned RETRY_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic               bfs_en,
  // actions arriving (task queue)
  input  logic               in_valid,
  output logic               in_ready,
  input  msg_t               in_msg,
  // messages leaving (output queue)
  output logic               out_valid,
  input  logic               out_ready,
  output msg_t               out_msg,
  // object memory
  output logic [SLOT_W-1:0]  rd_slot,
  input  vobj_t              rd_obj,
  output logic               wr_en,
  output logic [SLOT_W-1:0]  wr_slot,
  output vobj_t              wr_obj,
  output logic               alloc_req,
  input  logic               mem_full,
  input  logic [SLOT_W-1:0]  alloc_slot,
  // vicinity allocator
  output logic               va_take,
  input  logic [COORD_W-1:0] va_x,
  input  logic [COORD_W-1:0] va_y,
  // status
  output logic               busy,
  output cc_events_t         ev
);
  localparam int unsigned MAXE = (EDGE_SLOTS + 2 > FUTURE_Q) ? EDGE_SLOTS + 2 : FUTURE_Q;
  localparam int unsigned EW   = $clog2(MAXE + 1);

  typedef enum logic {S_IDLE, S_EMIT} state_e;
  state_e state;

  msg_t          elist   [MAXE];
  logic [EW-1:0] ecount, eidx;
  logic          edrain;              // each staged message pops a closure
  logic [SLOT_W-1:0] eslot;           // object whose future is drained

  // next-list built during execute
  msg_t          nlist   [MAXE];
  logic [EW-1:0] ncount;
  logic          ndrain;

  // the action chosen this cycle, and the retry buffer's state
  logic   r_valid, r_ready, r_pop, r_push, turn, use_retry, sel_valid, park, accept;
  msg_t   r_msg, sel;
  logic [$clog2(RETRY_DEPTH+1)-1:0] r_count;

  // future LCO next-state logic
  logic [1:0] fop;
  future_t    fut_nxt;
  logic       fut_need_alloc, fut_full, fut_ready, fut_empty;
  gaddr_t     fut_head;

  future_lco u_future (
    .cur       (rd_obj.ghost),
    .op        (fop),
    .closure   (sel.arg),
    .value     (sel.arg),
    .nxt       (fut_nxt),
    .need_alloc(fut_need_alloc),
    .full      (fut_full),
    .ready     (fut_ready),
    .head      (fut_head),
    .empty     (fut_empty)
  );

  // Retry buffer for parked actions, and the choice of the next action.

  msg_fifo #(.WIDTH(MSG_W), .DEPTH(RETRY_DEPTH), .PASS_READY(1'b1)) u_retry (
    .clk, .rst_n,
    .in_valid (r_push), .in_ready (r_ready), .in_data (sel),
    .out_valid(r_valid), .out_ready(r_pop), .out_data(r_msg),
    .count    (r_count)
  );

  assign use_retry = r_valid && (!in_valid || turn);
  assign sel       = use_retry ? r_msg : in_msg;
  assign sel_valid = (state == S_IDLE) && (use_retry || in_valid);
  // parking needed: insert, edge list full, future not set, queue full
  assign park      = sel.act == ACT_INSERT && int'(rd_obj.ecnt) >= EDGE_SLOTS &&
                     !fut_ready && fut_full;
  // a task-queue action that must park needs room in the retry buffer
  assign accept    = sel_valid && !(park && !use_retry && r_count == ($bits(r_count))'(RETRY_DEPTH));
  assign in_ready  = accept && !use_retry;
  assign r_pop     = accept && use_retry;
  assign r_push    = accept && park;

  gaddr_t self_addr;
  assign self_addr = '{y: my_y, x: my_x, slot: sel.dst.slot};

  function automatic msg_t mk(action_e a, gaddr_t d, gaddr_t g, level_t l);
    msg_t m;
    m.act   = a;
    m.dst   = d;
    m.arg   = g;
    m.level = l;
    return m;
  endfunction

  function automatic level_t inc_level(level_t l);
    return (l == LEVEL_INF) ? LEVEL_INF : l + 1'b1;
  endfunction

  assign busy      = (state != S_IDLE) || r_valid;
  assign out_valid = (state == S_EMIT);
  assign out_msg   = elist[eidx];

  // Operation on the addressed object's future.
  always_comb begin
    fop = 2'd0;
    if (sel_valid) begin
      if (sel.act == ACT_INSERT && int'(rd_obj.ecnt) >= EDGE_SLOTS) fop = 2'd1;  // await
      if (sel.act == ACT_SET_FUTURE)                                 fop = 2'd2;  // set
    end else if (state == S_EMIT && edrain && out_ready) begin
      fop = 2'd3;                                                                   // drain
    end
  end

  // Execute step (IDLE) and the drain read-modify-write (EMIT).
  always_comb begin
    vobj_t  o;
    level_t lv;
    logic   improved, room, take;
    gaddr_t nowhere;

    nowhere   = '0;
    o         = rd_obj;
    take      = accept;
    rd_slot   = (state == S_IDLE) ? sel.dst.slot : eslot;
    wr_slot   = rd_slot;
    wr_en     = 1'b0;
    wr_obj    = rd_obj;
    alloc_req = 1'b0;
    va_take   = 1'b0;
    ncount    = '0;
    ndrain    = 1'b0;
    ev        = '0;
    improved  = 1'b0;
    room      = 1'b0;
    lv        = rd_obj.level;
    for (int i = 0; i < MAXE; i++) nlist[i] = mk(ACT_NOP, nowhere, nowhere, LEVEL_INF);

    if (take) begin
      unique case (sel.act)
        ACT_BFS, ACT_INSERT: begin
          // A BFS action always offers its level; an insert offers the
          // parent's level only when BFS is enabled.
          improved = (sel.level < rd_obj.level) &&
                     (sel.act == ACT_BFS || bfs_en);
          lv       = improved ? sel.level : rd_obj.level;
          room     = (int'(rd_obj.ecnt) < EDGE_SLOTS);
          o.level  = lv;
          if (park) begin
            // Future queue full: park the action for a retry, change nothing.
            ev.requeue = 1'b1;
          end else begin
            wr_en = 1'b1;
            if (sel.act == ACT_INSERT && room) begin
              o.edges[rd_obj.ecnt] = sel.arg;
              o.ecnt               = rd_obj.ecnt + 1'b1;
              ev.insert            = 1'b1;
            end
            if (sel.act == ACT_INSERT && !room && !fut_ready) begin
              o.ghost = fut_nxt;
              ev.fut_enqueue = 1'b1;
            end
            // Diffusion over the object after a level improvement.
            if (improved) begin
              ev.bfs_improve = 1'b1;
              for (int i = 0; i < EDGE_SLOTS; i++)
                if (i < int'(o.ecnt)) begin
                  nlist[ncount] = mk(ACT_BFS, o.edges[i], nowhere, inc_level(lv));
                  ncount++;
                end
              if (rd_obj.ghost.state == FUT_SET) begin
                nlist[ncount] = mk(ACT_BFS, rd_obj.ghost.value, nowhere, lv);
                ncount++;
              end
            end else if (sel.act == ACT_INSERT && room && bfs_en && lv != LEVEL_INF) begin
              nlist[ncount] = mk(ACT_BFS, sel.arg, nowhere, inc_level(lv));
              ncount++;
            end
            if (sel.act == ACT_INSERT && !room) begin
              if (fut_ready) begin
                nlist[ncount] = mk(ACT_INSERT, rd_obj.ghost.value, sel.arg, lv);
                ncount++;
                ev.ghost_fwd = 1'b1;
              end else if (fut_need_alloc) begin
                nlist[ncount] = mk(ACT_ALLOCATE, '{y: va_y, x: va_x, slot: '0},
                                   self_addr, LEVEL_INF);
                ncount++;
                va_take      = 1'b1;
                ev.alloc_req = 1'b1;
              end
            end
            wr_obj = o;
          end
        end
        ACT_ALLOCATE: begin
          if (!mem_full) begin
            alloc_req = 1'b1;
            nlist[0]  = mk(ACT_SET_FUTURE, sel.arg,
                           '{y: my_y, x: my_x, slot: alloc_slot}, LEVEL_INF);
            ev.alloc_done = 1'b1;
          end else begin
            nlist[0]  = mk(ACT_ALLOCATE, '{y: va_y, x: va_x, slot: '0},
                           sel.arg, LEVEL_INF);
            va_take   = 1'b1;
            ev.alloc_fwd = 1'b1;
          end
          ncount = EW'(1);
        end
        ACT_SET_FUTURE: begin
          o.ghost      = fut_nxt;
          wr_en        = 1'b1;
          wr_obj       = o;
          for (int i = 0; i < FUTURE_Q; i++)
            if (i < int'(rd_obj.ghost.qcnt)) begin
              nlist[ncount] = mk(ACT_INSERT, sel.arg, rd_obj.ghost.closures[i],
                                 rd_obj.level);
              ncount++;
            end
          ndrain = (ncount != '0);
        end
        default: ;
      endcase
    end else if (state == S_EMIT && edrain && out_ready) begin
      // Releasing a closure removes it from the future's queue.
      o.ghost      = fut_nxt;
      wr_en        = 1'b1;
      wr_obj       = o;
      ev.fut_drain = 1'b1;
    end
    if (state == S_EMIT && !out_ready) ev.emit_stall = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      turn   <= 1'b0;
      state  <= S_IDLE;
      ecount <= '0;
      eidx   <= '0;
      edrain <= 1'b0;
      eslot  <= '0;
    end else begin
      if (sel_valid && r_valid && in_valid) turn <= !turn;
      unique case (state)
        S_IDLE: if (accept && ncount != '0) begin
          state  <= S_EMIT;
          ecount <= ncount;
          eidx   <= '0;
          edrain <= ndrain;
          eslot  <= sel.dst.slot;
        end
        S_EMIT: if (out_ready) begin
          if (eidx + 1'b1 == ecount) state <= S_IDLE;
          eidx <= eidx + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (accept)
      for (int i = 0; i < MAXE; i++) elist[i] <= nlist[i];
  end

  // Actions only reach the cell that holds their target object.
  a_local: assert property (@(posedge clk) disable iff (!rst_n)
    accept |-> sel.dst.x == my_x && sel.dst.y == my_y);
  // A staged message stays until the output queue takes it.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_msg));
endmodule
