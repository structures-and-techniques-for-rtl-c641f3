// tb_compute_cell: one compute cell at (1,1) of a 3x3 mesh, driven through
// its four links. Checks: actions for this cell are executed (levels read
// through the debug port); the BFS messages they produce leave on the link
// that YX routing gives for their destination; a message for this same cell
// loops back through the local port and is executed; a flit for another cell
// passes through in one cycle without touching the engine; the cell reports
// itself active while it works and idle afterwards.
module tb_compute_cell;
  import amcca_pkg::*;

  logic clk = 0, rst_n = 0, bfs_en = 1;
  logic [3:0] li_valid = '0, li_ready, lo_valid, lo_ready = '1;
  flit_t li_flit [4];
  flit_t lo_flit [4];
  logic [SLOT_W-1:0] dbg_slot = '0;
  vobj_t dbg_obj;
  logic active;
  cc_events_t ev;
  int checks = 0, failures = 0;

  compute_cell #(.MESH_X(3), .MESH_Y(3), .ROOT_SLOTS(4), .GHOST_SLOTS(4)) dut (
    .clk, .rst_n, .my_x(COORD_W'(1)), .my_y(COORD_W'(1)), .bfs_en,
    .link_in_valid(li_valid), .link_in_ready(li_ready), .link_in_flit(li_flit),
    .link_out_valid(lo_valid), .link_out_ready(lo_ready), .link_out_flit(lo_flit),
    .dbg_slot, .dbg_obj, .active, .ev);

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
  function automatic flit_t F(action_e a, gaddr_t d, gaddr_t g, int l);
    msg_t m;
    m.act = a; m.dst = d; m.arg = g; m.level = (l < 0) ? LEVEL_INF : level_t'(l);
    return msg2flit(m);
  endfunction

  typedef struct { int port; flit_t f; int cyc; } seen_t;
  seen_t seen [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n)
      for (int p = 0; p < 4; p++)
        if (lo_valid[p] && lo_ready[p]) seen.push_back('{p, lo_flit[p], cyc});
  end

  task automatic inject(int port, flit_t f, output int at);
    @(negedge clk);
    li_valid[port] = 1; li_flit[port] = f;
    @(posedge clk);
    while (!li_ready[port]) @(posedge clk);
    at = cyc;
    #1 li_valid[port] = 0;
  endtask

  task automatic settle();
    int n;
    n = 0;
    do begin @(posedge clk); #1; n++; end while (active && n < 200);
    repeat (2) @(posedge clk);
    #1;
  endtask

  task automatic expect_out(string what, int port, flit_t f);
    int hit;
    hit = 0;
    foreach (seen[i]) if (seen[i].port == port && seen[i].f == f) hit++;
    check(what, hit == 1);
  endtask

  initial begin
    int at;
    for (int p = 0; p < 4; p++) li_flit[p] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // BFS seed from the west
    inject(3, F(ACT_BFS, A(1,1,0), '0, 0), at);
    settle();
    dbg_slot = 0; #1;
    check("slot 0 took level 0", dbg_obj.level == 0);
    check("cell idle after the seed", !active && seen.size() == 0);
    // inserts from the north; their BFS messages leave by YX routing
    inject(0, F(ACT_INSERT, A(1,1,0), A(0,1,2), -1), at);
    inject(0, F(ACT_INSERT, A(1,1,0), A(2,2,1), -1), at);
    inject(1, F(ACT_INSERT, A(1,1,0), A(1,0,3), -1), at);
    inject(2, F(ACT_INSERT, A(1,1,0), A(1,2,0), -1), at);
    settle();
    expect_out("BFS to row 0 leaves north",        0, F(ACT_BFS, A(0,1,2), '0, 1));
    expect_out("BFS to row 2 leaves south",        1, F(ACT_BFS, A(2,2,1), '0, 1));
    expect_out("BFS to (x0,y1) leaves west",       3, F(ACT_BFS, A(1,0,3), '0, 1));
    expect_out("BFS to (x2,y1) leaves east",       2, F(ACT_BFS, A(1,2,0), '0, 1));
    check("exactly four messages out", seen.size() == 4);
    dbg_slot = 0; #1;
    check("slot 0 holds four edges", dbg_obj.ecnt == 4);
    // a fifth insert fills the list: ALLOCATE to the first vicinity cell (1,0)
    inject(3, F(ACT_INSERT, A(1,1,0), A(0,0,0), -1), at);
    settle();
    expect_out("ALLOCATE leaves north to (x1,y0)", 0, F(ACT_ALLOCATE, A(0,1,0), A(1,1,0), -1));
    // local loop-back: edge to slot 1 of this cell
    seen.delete();
    inject(2, F(ACT_INSERT, A(1,1,2), A(1,1,1), -1), at);
    inject(2, F(ACT_BFS, A(1,1,2), '0, 4), at);
    settle();
    dbg_slot = 1; #1;
    check("message to this cell executed here: slot 1 level 5", dbg_obj.level == 5);
    check("nothing left the cell", seen.size() == 0);
    // pass-through west -> east in one cycle
    seen.delete();
    inject(3, F(ACT_BFS, A(1,2,3), '0, 9), at);
    settle();
    check("pass-through flit leaves east", seen.size() == 1 && seen[0].port == 2 &&
          seen[0].f == F(ACT_BFS, A(1,2,3), '0, 9));
    if (seen.size() == 1) check("pass-through takes one cycle", seen[0].cyc == at + 1);
    check("idle at the end", !active);
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
