// tb_cc_memory: a memory of 4 root and 3 ghost slots. Checks that every slot
// comes out of reset as an empty vertex, that written objects read back on
// both ports, that the pool hands out slots 4, 5, 6 in order, clearing each
// one, and then reports full.
module tb_cc_memory;
  import amcca_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [SLOT_W-1:0] rd_slot = '0, wr_slot = '0, alloc_slot, dbg_slot = '0;
  vobj_t rd_obj, wr_obj, dbg_obj;
  logic wr_en = 0, alloc_req = 0, full;
  int checks = 0, failures = 0;

  cc_memory #(.ROOT_SLOTS(4), .GHOST_SLOTS(3)) dut (
    .clk, .rst_n, .rd_slot, .rd_obj, .wr_en, .wr_slot, .wr_obj,
    .alloc_req, .full, .alloc_slot, .dbg_slot, .dbg_obj);

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic vobj_t pattern(int n);
    vobj_t o;
    o = '0;
    o.level = level_t'(n * 3 + 1);
    o.ecnt  = 2;
    o.edges[0] = '{y: COORD_W'(n), x: COORD_W'(n + 1), slot: SLOT_W'(n + 2)};
    o.edges[1] = '{y: COORD_W'(n + 5), x: COORD_W'(n), slot: SLOT_W'(7)};
    o.ghost.state = FUT_PENDING;
    o.ghost.qcnt  = 1;
    return o;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    for (int s = 0; s < 7; s++) begin
      rd_slot = SLOT_W'(s); #1;
      check($sformatf("slot %0d empty after reset", s),
            rd_obj.level == LEVEL_INF && rd_obj.ecnt == 0 && rd_obj.ghost.state == FUT_NULL);
    end
    check("pool not full after reset", !full && alloc_slot == 4);
    // write the roots and the first pool slot with patterns
    for (int s = 0; s < 5; s++) begin
      @(negedge clk);
      wr_en = 1; wr_slot = SLOT_W'(s); wr_obj = pattern(s);
    end
    @(negedge clk); wr_en = 0;
    for (int s = 0; s < 4; s++) begin
      rd_slot = SLOT_W'(s); dbg_slot = SLOT_W'(3 - s); #1;
      check($sformatf("slot %0d reads back", s), rd_obj == pattern(s));
      check($sformatf("debug port slot %0d", 3 - s), dbg_obj == pattern(3 - s));
    end
    // allocate the three ghost slots
    for (int k = 0; k < 3; k++) begin
      @(negedge clk);
      check($sformatf("alloc %0d gets slot %0d", k, 4 + k), alloc_slot == SLOT_W'(4 + k) && !full);
      alloc_req = 1;
    end
    @(negedge clk); alloc_req = 0;
    check("pool full after three allocations", full);
    rd_slot = 4; #1;
    check("allocated slot was cleared", rd_obj.level == LEVEL_INF && rd_obj.ecnt == 0);
    rd_slot = 2; #1;
    check("root untouched by allocation", rd_obj == pattern(2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
