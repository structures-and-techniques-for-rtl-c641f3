// tb_vicinity_allocator: places the allocator at every cell of a 5x5 mesh,
// takes 30 choices at each, and checks every choice lies 1 or 2 hops away
// and inside the mesh; at an interior cell it also checks that 12 takes
// visit all 12 cells of the neighbourhood once each, and at a corner that
// only the in-mesh cells (5 of them) are chosen.
module tb_vicinity_allocator;
  import amcca_pkg::*;
  localparam int MX = 5, MY = 5;

  logic clk = 0, rst_n = 0, take = 0;
  logic [COORD_W-1:0] my_x, my_y, tx, ty;
  int checks = 0, failures = 0;

  vicinity_allocator #(.MESH_X(MX), .MESH_Y(MY), .HOPS(2)) dut (
    .clk, .rst_n, .my_x, .my_y, .take, .target_x(tx), .target_y(ty));

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    int seen [MY][MX];
    int distinct;
    for (int y = 0; y < MY; y++)
      for (int x = 0; x < MX; x++) begin
        rst_n = 0; my_x = COORD_W'(x); my_y = COORD_W'(y);
        @(posedge clk); #1; rst_n = 1;
        for (int yy = 0; yy < MY; yy++) for (int xx = 0; xx < MX; xx++) seen[yy][xx] = 0;
        for (int k = 0; k < 30; k++) begin
          int d;
          #1;
          d = (int'(tx) > x ? int'(tx) - x : x - int'(tx)) + (int'(ty) > y ? int'(ty) - y : y - int'(ty));
          check($sformatf("(%0d,%0d) pick %0d in range", x, y, k),
                d >= 1 && d <= 2 && int'(tx) < MX && int'(ty) < MY);
          if (k < 12 && int'(tx) < MX && int'(ty) < MY) seen[ty][tx]++;
          take = 1; @(posedge clk); #1; take = 0;
        end
        distinct = 0;
        for (int yy = 0; yy < MY; yy++) for (int xx = 0; xx < MX; xx++) if (seen[yy][xx] > 0) distinct++;
        if (x == 2 && y == 2) check("interior cell covers 12 neighbours", distinct == 12);
        if (x == 0 && y == 0) check("corner cell uses the 5 in-mesh neighbours", distinct == 5);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
