// vicinity_allocator: picks the compute cell that will hold a new ghost
// vertex, never more than HOPS mesh hops from this cell.
//
// The paper keeps ghost vertices close to the vertex they extend ("not more
// than 2 hops away from the originating CC"). It does not say which of the
// nearby cells is chosen; here the candidates are all cells at a Manhattan
// distance of 1 to HOPS (12 cells for HOPS = 2), listed nearest first, and a
// cursor walks through them round-robin so successive ghosts spread over the
// neighbourhood. Candidates outside the mesh are skipped. `target_x/y` always
// shows the next choice; a pulse on `take` consumes it and advances the
// cursor in the next cycle. A cell on a 1x1 mesh has no candidate and then
// names itself. Cursor order and round-robin rotation are this design's own.
module vicinity_allocator
  import amcca_pkg::*;
#(
  parameter int unsigned MESH_X = 32,
  parameter int unsigned MESH_Y = 32,
  parameter int unsigned HOPS   = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic               take,
  output logic [COORD_W-1:0] target_x,
  output logic [COORD_W-1:0] target_y
);
  localparam int unsigned NCAND = 2 * HOPS * (HOPS + 1);
  localparam int unsigned CW    = $clog2(NCAND + 1);

  // Offset of candidate k: distance 1 first, then 2, ...; within a distance,
  // in order of dy then dx.
  function automatic void cand(input int unsigned k, output int dx, output int dy);
    int unsigned n;
    n  = 0;
    dx = 0;
    dy = 0;
    for (int d = 1; d <= int'(HOPS); d++)
      for (int yy = -int'(HOPS); yy <= int'(HOPS); yy++)
        for (int xx = -int'(HOPS); xx <= int'(HOPS); xx++) begin
          int ax, ay;
          ax = (xx < 0) ? -xx : xx;
          ay = (yy < 0) ? -yy : yy;
          if (ax + ay == d) begin
            if (n == k) begin
              dx = xx;
              dy = yy;
            end
            n++;
          end
        end
  endfunction

  logic [CW-1:0] cursor, pick;
  logic          found;

  always_comb begin
    found    = 1'b0;
    pick     = cursor;
    target_x = my_x;
    target_y = my_y;
    for (int unsigned k = 0; k < NCAND; k++) begin
      int unsigned idx;
      int dx, dy, tx, ty;
      idx = (int'(cursor) + k) % NCAND;
      cand(idx, dx, dy);
      tx = int'(my_x) + dx;
      ty = int'(my_y) + dy;
      if (!found && tx >= 0 && ty >= 0 && tx < int'(MESH_X) && ty < int'(MESH_Y)) begin
        found    = 1'b1;
        pick     = CW'(idx);
        target_x = COORD_W'(tx);
        target_y = COORD_W'(ty);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                cursor <= '0;
    else if (take && found)    cursor <= (pick == CW'(NCAND - 1)) ? '0 : pick + 1'b1;
  end

  // The chosen cell is within the allowed distance of this cell.
  a_vicinity: assert property (@(posedge clk) disable iff (!rst_n)
    found |-> ((target_x > my_x ? target_x - my_x : my_x - target_x) +
               (target_y > my_y ? target_y - my_y : my_y - target_y)) <= COORD_W'(HOPS));
endmodule
