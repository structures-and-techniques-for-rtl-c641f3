// tb_mesh_router: a router placed at (2,2) of a 5x5 mesh.
// 1. Latency: a flit entering from the west for (4,2) must be on the east
//    output one cycle later (one hop per cycle).
// 2. Random traffic: every input offers flits with random destinations in
//    the 5x5 mesh and random output back-pressure; each flit must leave
//    exactly once, unchanged, on the YX-order port computed here
//    independently (row first, then column, else local).
module tb_mesh_router;
  import amcca_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [NPORTS-1:0] in_valid = '0, in_ready, out_valid, out_ready = '1;
  flit_t in_flit [NPORTS];
  flit_t out_flit[NPORTS];
  logic busy;
  int checks = 0, failures = 0;

  mesh_router dut (.clk, .rst_n, .my_x(COORD_W'(2)), .my_y(COORD_W'(2)),
                   .in_valid, .in_ready, .in_flit, .out_valid, .out_ready, .out_flit, .busy);

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int expect_port(msg_t m);
    if (m.dst.y < 2) return 0;
    if (m.dst.y > 2) return 1;
    if (m.dst.x < 2) return 3;
    if (m.dst.x > 2) return 2;
    return 4;
  endfunction

  function automatic flit_t mkflit(int id, int x, int y);
    msg_t m;
    m = '0;
    m.act   = ACT_BFS;
    m.dst.x = COORD_W'(x);
    m.dst.y = COORD_W'(y);
    m.level = level_t'(id);
    return msg2flit(m);
  endfunction

  localparam int NMSG = 2000;
  int got [NMSG];
  int sent = 0;
  logic monitor_on = 0;

  // output monitor
  always @(posedge clk) if (monitor_on) begin
    for (int o = 0; o < NPORTS; o++)
      if (out_valid[o] && out_ready[o]) begin
        msg_t m;
        m = flit2msg(out_flit[o]);
        check($sformatf("flit %0d on port %0d", m.level, o), expect_port(m) == o);
        if (int'(m.level) < NMSG) got[m.level]++;
      end
  end

  initial begin
    for (int i = 0; i < NPORTS; i++) in_flit[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // 1. latency
    in_flit[3] = mkflit(0, 4, 2);
    in_valid[3] = 1;
    @(posedge clk); #1;
    in_valid[3] = 0;
    check("one hop per cycle: flit on east output next cycle",
          out_valid[2] && flit2msg(out_flit[2]).level == 0);
    @(posedge clk); #1;
    check("east output cleared after it was taken", !out_valid[2]);
    // 2. random traffic with back-pressure
    monitor_on = 1;
    for (int i = 0; i < NMSG; i++) got[i] = 0;
    while (sent < NMSG) begin
      @(negedge clk);
      out_ready = NPORTS'($urandom);
      for (int p = 0; p < NPORTS; p++) begin
        if (in_valid[p] && in_ready[p]) ;  // was taken at the last edge
      end
      for (int p = 0; p < NPORTS; p++)
        if (!in_valid[p] && sent < NMSG && ($urandom % 2 == 0)) begin
          in_flit[p]  = mkflit(sent, int'($urandom % 5), int'($urandom % 5));
          in_valid[p] = 1;
          sent++;
        end
      @(posedge clk);
      #1;
      for (int p = 0; p < NPORTS; p++)
        ;
    end
    // let everything drain
    @(negedge clk);
    out_ready = '1;
    repeat (50) @(posedge clk);
    for (int i = 0; i < NMSG; i++) check($sformatf("flit %0d delivered once", i), got[i] == 1);
    check("router empty at the end", !busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // input driver: drop valid once a flit has been accepted
  always @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++)
      if (in_valid[p] && in_ready[p]) in_valid[p] <= 1'b0;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
