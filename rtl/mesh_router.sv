// mesh_router: the network part of a compute cell, a five-port router for a
// 2-D mesh (north, south, east, west and the local cell).
//
// Each message is one LINK_W-bit flit. Every input port has a small
// fall-through FIFO (a flit reaching an empty FIFO can leave at once). The
// head flit of each FIFO is routed by YX dimension order: it first moves
// along y (north when the destination row is smaller, south when larger) and
// only when the row matches does it move along x (west/east); when both match
// it leaves on the local port. YX order is the minimal, turn-restricted,
// deadlock-free routing the paper names. Each output port has a register and
// a round-robin arbiter over the five inputs, so a flit crosses one hop per
// cycle when nothing blocks it, matching the paper's one-hop-per-cycle model.
// Links use valid/ready: a flit moves when both are high, and out_valid with
// its flit stays until accepted. Row 0 is north, column 0 is west. FIFO depth,
// the arbiter and the handshake are this design's own choices.
module mesh_router
  import amcca_pkg::*;
#(
  parameter int unsigned IN_DEPTH = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic [NPORTS-1:0]  in_valid,
  output logic [NPORTS-1:0]  in_ready,
  input  flit_t              in_flit  [NPORTS],
  output logic [NPORTS-1:0]  out_valid,
  input  logic [NPORTS-1:0]  out_ready,
  output flit_t              out_flit [NPORTS],
  output logic               busy        // any flit buffered in the router
);
  logic [NPORTS-1:0] hv;                 // FIFO head valid
  logic [NPORTS-1:0] pop;
  flit_t             hf   [NPORTS];
  logic [$clog2(IN_DEPTH+1)-1:0] cnt [NPORTS];
  port_e             route [NPORTS];

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    msg_fifo #(.WIDTH(LINK_W), .DEPTH(IN_DEPTH), .FALLTHROUGH(1'b1)) u_fifo (
      .clk, .rst_n,
      .in_valid (in_valid[i]), .in_ready (in_ready[i]), .in_data (in_flit[i]),
      .out_valid(hv[i]), .out_ready(pop[i]), .out_data(hf[i]),
      .count    (cnt[i])
    );
  end

  // YX dimension-ordered route of each head flit.
  always_comb begin
    for (int i = 0; i < NPORTS; i++) begin
      msg_t m;
      m = flit2msg(hf[i]);
      if (m.dst.y < my_y)      route[i] = P_N;
      else if (m.dst.y > my_y) route[i] = P_S;
      else if (m.dst.x < my_x) route[i] = P_W;
      else if (m.dst.x > my_x) route[i] = P_E;
      else                     route[i] = P_L;
    end
  end

  // Per-output round-robin arbitration into the output register.
  logic [2:0]        rr   [NPORTS];
  logic [NPORTS-1:0] load;
  logic [2:0]        win  [NPORTS];

  always_comb begin
    int unsigned i;
    i   = 0;
    pop = '0;
    for (int o = 0; o < NPORTS; o++) begin
      load[o] = 1'b0;
      win[o]  = '0;
      if (!out_valid[o] || out_ready[o]) begin
        for (int k = 0; k < NPORTS; k++) begin
          i = (int'(rr[o]) + k) % NPORTS;
          if (!load[o] && hv[i] && route[i] == port_e'(o)) begin
            load[o] = 1'b1;
            win[o]  = 3'(i);
          end
        end
      end
      if (load[o]) pop[win[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      for (int o = 0; o < NPORTS; o++) rr[o] <= '0;
    end else begin
      for (int o = 0; o < NPORTS; o++) begin
        if (load[o]) begin
          out_valid[o] <= 1'b1;
          rr[o]        <= (win[o] == 3'(NPORTS - 1)) ? 3'd0 : win[o] + 3'd1;
        end else if (out_ready[o]) begin
          out_valid[o] <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int o = 0; o < NPORTS; o++)
      if (load[o]) out_flit[o] <= hf[win[o]];
  end

  always_comb begin
    busy = |out_valid;
    for (int i = 0; i < NPORTS; i++) busy = busy | (cnt[i] != '0);
  end

  // A flit offered on an output stays, unchanged, until it is taken.
  for (genvar o = 0; o < NPORTS; o++) begin : g_chk
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_flit[o]));
  end
endmodule
