// tb_cc_logic: the action engine of the cell at (1,1) of a 4x4 mesh, with a
// memory of 4 root and 2 ghost slots and the vicinity allocator. Directed
// actions are applied one at a time; for each, the staged messages are
// compared with a list written out by hand from the action rules, and the
// engine's time (one execute cycle plus one cycle per staged message, more
// while the output stalls) is checked. Covered: BFS level update and
// diffusion over edges and a set ghost; insert with BFS propagation; a full
// edge list turning the future pending and sending ALLOCATE to the first
// vicinity cell; closures queued; a full future queue sending the action
// back to itself; SET_FUTURE releasing the closures in order and emptying the
// queue; inserts forwarded to the ghost; a forwarded insert carrying a lower
// level; ALLOCATE served from the pool and, when it is empty, passed on;
// ingestion-only mode; output back-pressure.
module tb_cc_logic;
  import amcca_pkg::*;

  logic clk = 0, rst_n = 0, bfs_en = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  msg_t in_msg, out_msg;
  logic [SLOT_W-1:0] rd_slot, wr_slot, alloc_slot, dbg_slot = '0;
  vobj_t rd_obj, wr_obj, dbg_obj;
  logic wr_en, alloc_req, mem_full, va_take, busy;
  logic [COORD_W-1:0] va_x, va_y;
  cc_events_t ev;
  int checks = 0, failures = 0;

  localparam logic [COORD_W-1:0] MX = 1, MY = 1;

  cc_logic #(.MESH_X(4), .MESH_Y(4)) dut (
    .clk, .rst_n, .my_x(MX), .my_y(MY), .bfs_en,
    .in_valid, .in_ready, .in_msg, .out_valid, .out_ready, .out_msg,
    .rd_slot, .rd_obj, .wr_en, .wr_slot, .wr_obj, .alloc_req, .mem_full, .alloc_slot,
    .va_take, .va_x, .va_y, .busy, .ev);

  cc_memory #(.ROOT_SLOTS(4), .GHOST_SLOTS(2)) u_mem (
    .clk, .rst_n, .rd_slot, .rd_obj, .wr_en, .wr_slot, .wr_obj,
    .alloc_req, .full(mem_full), .alloc_slot, .dbg_slot, .dbg_obj);

  vicinity_allocator #(.MESH_X(4), .MESH_Y(4), .HOPS(2)) u_va (
    .clk, .rst_n, .my_x(MX), .my_y(MY), .take(va_take), .target_x(va_x), .target_y(va_y));

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic gaddr_t A(int y, int x, int s);
    return '{y: COORD_W'(y), x: COORD_W'(x), slot: SLOT_W'(s)};
  endfunction
  function automatic msg_t M(action_e a, gaddr_t d, gaddr_t g, int l);
    msg_t m;
    m.act = a; m.dst = d; m.arg = g; m.level = (l < 0) ? LEVEL_INF : level_t'(l);
    return m;
  endfunction
  function automatic gaddr_t E(int n);   // some edge target
    return A(3, n % 4, 10 + n);
  endfunction

  msg_t got [$];
  int   stalls = 0;
  logic stall_mode = 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) got.push_back(out_msg);
  always @(negedge clk) out_ready = stall_mode ? 1'($urandom) : 1'b1;
  always @(posedge clk) if (ev.emit_stall) stalls++;

  // Apply one action; check staged messages and cycle count.
  task automatic run(string name, msg_t m, msg_t exp [$], bit timed = 1);
    int cycles;
    got.delete();
    @(negedge clk);
    in_valid = 1; in_msg = m;
    @(posedge clk);
    #1 in_valid = 0;
    cycles = 1;
    while (busy) begin
      @(posedge clk); #1;
      cycles++;
    end
    check($sformatf("%s: %0d messages (got %0d)", name, exp.size(), got.size()),
          got.size() == exp.size());
    for (int i = 0; i < exp.size() && i < got.size(); i++)
      check($sformatf("%s: message %0d", name, i), got[i] == exp[i]);
    if (!stall_mode && timed)
      check($sformatf("%s: %0d cycles, expected %0d", name, cycles, 1 + exp.size()),
            cycles == 1 + exp.size());
  endtask

  function automatic vobj_t obj(int s);
    return u_mem.mem[s];
  endfunction

  initial begin
    gaddr_t G;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // BFS on an isolated vertex: takes the level, nothing to diffuse
    run("bfs seed", M(ACT_BFS, A(1,1,0), '0, 0), '{});
    check("slot 0 level 0", obj(0).level == 0);
    // inserts with room: each propagates BFS(edge, 1)
    for (int i = 1; i <= 4; i++)
      run($sformatf("insert %0d", i), M(ACT_INSERT, A(1,1,0), E(i), -1),
          '{M(ACT_BFS, E(i), '0, 1)});
    check("four edges stored", obj(0).ecnt == 4 && obj(0).edges[3] == E(4));
    // list full: future pending, ALLOCATE to (x=1,y=0), first vicinity cell
    run("insert 5 allocates", M(ACT_INSERT, A(1,1,0), E(5), -1),
        '{M(ACT_ALLOCATE, A(0,1,0), A(1,1,0), -1)});
    check("future pending with one closure",
          obj(0).ghost.state == FUT_PENDING && obj(0).ghost.qcnt == 1);
    for (int i = 6; i <= 8; i++)
      run($sformatf("insert %0d queued", i), M(ACT_INSERT, A(1,1,0), E(i), -1), '{});
    check("four closures", obj(0).ghost.qcnt == 4);
    // queue full: the action is parked in the retry buffer and retried
    got.delete();
    @(negedge clk);
    in_valid = 1; in_msg = M(ACT_INSERT, A(1,1,0), E(9), -1);
    @(posedge clk);
    #1 in_valid = 0;
    repeat (6) @(posedge clk);
    #1;
    check("parked action sends nothing", got.size() == 0);
    check("parked action waits in the retry buffer", dut.r_count == 1 && busy);
    check("parking changed nothing", obj(0).ghost.qcnt == 4 && obj(0).ecnt == 4);
    // continuation returns: closures released in order, queue drained
    G = A(1,2,4);
    run("set future", M(ACT_SET_FUTURE, A(1,1,0), G, -1),
        '{M(ACT_INSERT, G, E(5), 0), M(ACT_INSERT, G, E(6), 0),
          M(ACT_INSERT, G, E(7), 0), M(ACT_INSERT, G, E(8), 0),
          M(ACT_INSERT, G, E(9), 0)}, 0);
    check("future set and empty",
          obj(0).ghost.state == FUT_SET && obj(0).ghost.value == G && obj(0).ghost.qcnt == 0);
    check("retry buffer empty", dut.r_count == 0);
    run("insert 10 forwarded", M(ACT_INSERT, A(1,1,0), E(10), -1), '{M(ACT_INSERT, G, E(10), 0)});
    run("no improvement", M(ACT_BFS, A(1,1,0), '0, 3), '{});
    // ingestion only: no BFS propagation from inserts
    bfs_en = 0;
    run("ingest-only insert a", M(ACT_INSERT, A(1,1,3), E(20), -1), '{});
    run("ingest-only insert b", M(ACT_INSERT, A(1,1,3), E(21), -1), '{});
    run("ingest-only insert c", M(ACT_INSERT, A(1,1,3), E(22), -1), '{});
    run("ingest-only insert d", M(ACT_INSERT, A(1,1,3), E(23), -1), '{});
    run("ingest-only insert e allocates", M(ACT_INSERT, A(1,1,3), E(24), -1),
        '{M(ACT_ALLOCATE, A(1,0,0), A(1,1,3), -1)});
    run("set future slot 3", M(ACT_SET_FUTURE, A(1,1,3), A(2,1,5), -1),
        '{M(ACT_INSERT, A(2,1,5), E(24), -1)});
    bfs_en = 1;
    // BFS diffusion over 4 edges and the set ghost
    run("bfs diffuse", M(ACT_BFS, A(1,1,3), '0, 2),
        '{M(ACT_BFS, E(20), '0, 3), M(ACT_BFS, E(21), '0, 3), M(ACT_BFS, E(22), '0, 3),
          M(ACT_BFS, E(23), '0, 3), M(ACT_BFS, A(2,1,5), '0, 2)});
    // allocate system action: pool of 2, then passed on
    run("allocate 1", M(ACT_ALLOCATE, A(1,1,0), A(0,0,2), -1),
        '{M(ACT_SET_FUTURE, A(0,0,2), A(1,1,4), -1)});
    run("allocate 2", M(ACT_ALLOCATE, A(1,1,0), A(0,0,3), -1),
        '{M(ACT_SET_FUTURE, A(0,0,3), A(1,1,5), -1)});
    run("allocate 3 forwarded", M(ACT_ALLOCATE, A(1,1,0), A(0,0,1), -1),
        '{M(ACT_ALLOCATE, A(1,2,0), A(0,0,1), -1)});
    // forwarded insert with a lower level: ghost takes it and diffuses
    run("ghost insert with level", M(ACT_INSERT, A(1,1,4), E(30), 7),
        '{M(ACT_BFS, E(30), '0, 8)});
    check("ghost took level 7", obj(4).level == 7);
    // back-pressure on the output
    stall_mode = 1;
    run("diffuse under back-pressure", M(ACT_BFS, A(1,1,3), '0, 1),
        '{M(ACT_BFS, E(20), '0, 2), M(ACT_BFS, E(21), '0, 2), M(ACT_BFS, E(22), '0, 2),
          M(ACT_BFS, E(23), '0, 2), M(ACT_BFS, A(2,1,5), '0, 1)});
    check("back-pressure stalled the engine", stalls > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
