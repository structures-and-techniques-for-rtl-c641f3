// tb_amcca_chip_scale: the chip on an 8x8 mesh with every other parameter
// at its default (16 root and 16 ghost slots per cell, default queue and IO
// buffer depths, 2-hop vicinity) running a streamed BFS.
//
// Vertex v lives on cell v mod 64, in root slot v div 64. A random directed
// graph on 1024 vertices with a 16-edge hub vertex is streamed in four
// increments through both IO channels, one record per cycle from the host.
// The first increment runs in ingestion-only mode, after which the edges
// stored over all objects must equal those inserted. A seed then starts a
// BFS from vertex 0, and the remaining increments run with BFS on. After
// each, every root vertex's level must equal a reference BFS computed here,
// and every record must have left the IO cells. Mechanism counts are printed
// but not required: at the default queue sizes this load does not stall the
// engines or the host port, which the 4x4 end-to-end test forces instead.
module tb_amcca_chip_scale;
  import amcca_pkg::*;

  localparam int MX = 8, MY = 8, ROOTS = 16, GHOSTS = 16;
  localparam int NV = MX * MY * ROOTS;      // vertices
  localparam int NE = 3000;                 // edges in all
  localparam int NINC = 4;                  // increments
  localparam int HUB_EDGES = 16;
  localparam int WATCHDOG = 200000;

  logic clk = 0, rst_n = 0, start = 0, bfs_en = 0;
  logic [1:0] host_valid = '0, host_ready;
  io_rec_t host_rec [2];
  logic [$clog2(MX*MY+1)-1:0] active_cells;
  logic quiescent;
  cc_events_t ev_any;
  logic [31:0] io_sent;
  gaddr_t dbg_addr = '0;
  vobj_t  dbg_obj;

  amcca_chip #(.MESH_X(MX), .MESH_Y(MY)) dut (
    .clk, .rst_n, .start, .bfs_en, .host_valid, .host_ready, .host_rec,
    .active_cells, .quiescent, .ev_any, .io_sent, .dbg_addr, .dbg_obj);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---- graph and reference ----
  int esrc [NE];
  int edst [NE];
  int ref_lvl [NV];
  int lcg = 12345;
  function automatic int rnd(int n);
    lcg = lcg * 1103515245 + 12345;
    return ((lcg >>> 8) & 32'h7fffff) % n;
  endfunction

  function automatic gaddr_t vaddr(int v);
    int c;
    c = v % (MX * MY);
    return '{y: COORD_W'(c / MX), x: COORD_W'(c % MX), slot: SLOT_W'(v / (MX * MY))};
  endfunction

  task automatic reference_bfs(int upto);
    bit changed;
    for (int v = 0; v < NV; v++) ref_lvl[v] = -1;
    ref_lvl[0] = 0;
    do begin
      changed = 0;
      for (int e = 0; e < upto; e++)
        if (ref_lvl[esrc[e]] >= 0 && (ref_lvl[edst[e]] < 0 || ref_lvl[esrc[e]] + 1 < ref_lvl[edst[e]])) begin
          ref_lvl[edst[e]] = ref_lvl[esrc[e]] + 1;
          changed = 1;
        end
    end while (changed);
  endtask

  // ---- mechanism counters ----
  int n_insert, n_improve, n_alloc, n_alloc_done, n_alloc_fwd, n_enq, n_drain,
      n_fwd, n_requeue, n_stall, n_host_stall, n_mode, n_cycles, max_active;
  always @(posedge clk) if (rst_n) begin
    n_cycles++;
    if (ev_any.insert)      n_insert++;
    if (ev_any.bfs_improve) n_improve++;
    if (ev_any.alloc_req)   n_alloc++;
    if (ev_any.alloc_done)  n_alloc_done++;
    if (ev_any.alloc_fwd)   n_alloc_fwd++;
    if (ev_any.fut_enqueue) n_enq++;
    if (ev_any.fut_drain)   n_drain++;
    if (ev_any.ghost_fwd)   n_fwd++;
    if (ev_any.requeue)     n_requeue++;
    if (ev_any.emit_stall)  n_stall++;
    if (|(host_valid & ~host_ready)) n_host_stall++;
    if (int'(active_cells) > max_active) max_active = int'(active_cells);
  end

  // ---- host ----
  task automatic push(int ch, io_rec_t r);
    @(negedge clk);
    host_valid[ch] = 1; host_rec[ch] = r;
    @(posedge clk);
    while (!host_ready[ch]) @(posedge clk);
    #1 host_valid[ch] = 0;
  endtask

  task automatic run_until_quiet(string what);
    int n;
    @(negedge clk); start = 1;
    n = 0;
    repeat (3) @(posedge clk);
    while (!quiescent) begin @(posedge clk); n++; end
    @(negedge clk); start = 0;
    $display("%s: %0d cycles to quiescence", what, n);
  endtask

  // stream edges [lo, hi) as one increment. The IO cells start 60 cycles
  // after loading begins, so the host port stalls once the buffers are full
  // and then streams while the chip runs.
  task automatic increment(int lo, int hi, string what);
    int e;
    fork
      begin repeat (60) @(posedge clk); @(negedge clk); start = 1; end
    join_none
    e = lo;
    while (e < hi) begin
      io_rec_t r;
      r.seed = 0; r.src = vaddr(esrc[e]); r.dst = vaddr(edst[e]);
      push(e % 2, r);
      e++;
    end
    run_until_quiet(what);
  endtask

  task automatic check_levels(string what);
    int bad;
    bad = 0;
    for (int v = 0; v < NV; v++) begin
      int got;
      dbg_addr = vaddr(v); #1;
      got = (dbg_obj.level == LEVEL_INF) ? -1 : int'(dbg_obj.level);
      if (got != ref_lvl[v]) begin
        bad++;
        if (bad < 5) $display("  vertex %0d level %0d, expected %0d", v, got, ref_lvl[v]);
      end
      checks++;
    end
    failures += bad;
    $display("%s: %0d of %0d vertex levels wrong", what, bad, NV);
  endtask

  initial begin
    int per, edges_seen;
    n_insert = 0; n_improve = 0; n_alloc = 0; n_alloc_done = 0; n_alloc_fwd = 0;
    n_enq = 0; n_drain = 0; n_fwd = 0; n_requeue = 0; n_stall = 0; n_host_stall = 0;
    n_mode = 0; n_cycles = 0; max_active = 0;
    host_rec[0] = '0; host_rec[1] = '0;
    // graph: the hub (vertex 1) gets HUB_EDGES edges at the start of
    // increment 1; the rest are random
    for (int e = 0; e < NE; e++) begin
      if (e < HUB_EDGES) begin esrc[e] = 1; edst[e] = 2 + rnd(NV - 2); end
      else begin esrc[e] = rnd(NV); edst[e] = rnd(NV); end
    end
    esrc[NE/NINC] = 0; edst[NE/NINC] = 1;   // connect the source to the hub in increment 2
    repeat (3) @(posedge clk);
    rst_n = 1;
    per = NE / NINC;
    // increment 1: ingestion only
    increment(0, per, "increment 1 (ingestion only)");
    begin
      int s;
      s = 0;
      for (int y = 0; y < MY; y++)
        for (int x = 0; x < MX; x++)
          for (int k = 0; k < ROOTS + GHOSTS; k++) begin
            dbg_addr = '{y: COORD_W'(y), x: COORD_W'(x), slot: SLOT_W'(k)};
            #1;
            s += int'(dbg_obj.ecnt);
          end
      check($sformatf("ingestion only stored %0d of %0d edges", s, per), s == per);
      check("no level improvements in ingestion only", n_improve == 0);
    end
    // switch to BFS and seed from vertex 0
    bfs_en = 1; n_mode++;
    begin
      io_rec_t r;
      r.seed = 1; r.src = vaddr(0); r.dst = '0;
      push(0, r);
    end
    run_until_quiet("BFS seed over increment 1");
    reference_bfs(per);
    check_levels("after seed");
    for (int i = 1; i < NINC; i++) begin
      int hi;
      hi = (i == NINC - 1) ? NE : (i + 1) * per;
      increment(i * per, hi, $sformatf("increment %0d (ingestion and BFS)", i + 1));
      reference_bfs(hi);
      check_levels($sformatf("after increment %0d", i + 1));
    end
    check("io cells sent every record", io_sent == NE + 1);
    $display("events: insert=%0d improve=%0d alloc=%0d alloc_done=%0d alloc_fwd=%0d enqueue=%0d drain=%0d ghost_fwd=%0d requeue=%0d emit_stall=%0d host_stall=%0d mode_switch=%0d max_active=%0d cycles=%0d",
             n_insert, n_improve, n_alloc, n_alloc_done, n_alloc_fwd, n_enq, n_drain, n_fwd,
             n_requeue, n_stall, n_host_stall, n_mode, max_active, n_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog: quiescent=%0d active=%0d", quiescent, active_cells);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
