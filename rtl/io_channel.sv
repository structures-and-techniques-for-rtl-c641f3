// io_channel: an IO channel on one edge of the chip, holding NCELLS IO cells,
// one per mesh column.
//
// The host streams records (edges, or BFS seeds) into the channel through a
// single valid/ready port before or while the computation runs; the channel
// deals them out round-robin into per-cell buffers of BUF_DEPTH records, so
// the edges of an increment are spread over all the channel's IO cells as the
// paper describes. While `start` is high every IO cell takes one record per
// cycle from its buffer and sends its action into the mesh. When the next
// buffer in turn is full, the host port stalls. `empty` is high when every
// buffer and every IO cell output is empty. The buffer depth and the
// round-robin dealing are this design's choices.
module io_channel
  import amcca_pkg::*;
#(
  parameter int unsigned NCELLS    = 32,
  parameter int unsigned BUF_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              host_valid,
  output logic              host_ready,
  input  io_rec_t           host_rec,
  output logic [NCELLS-1:0] out_valid,
  input  logic [NCELLS-1:0] out_ready,
  output flit_t             out_flit [NCELLS],
  output logic              empty,
  output logic [31:0]       sent
);
  localparam int unsigned RW = (NCELLS > 1) ? $clog2(NCELLS) : 1;
  localparam int unsigned RECW = $bits(io_rec_t);

  logic [RW-1:0]     turn;
  logic [NCELLS-1:0] b_in_ready, b_valid, b_ready, b_nempty;
  io_rec_t           b_rec  [NCELLS];
  logic [31:0]       c_sent [NCELLS];

  assign host_ready = b_in_ready[turn];

  for (genvar c = 0; c < NCELLS; c++) begin : g_cell
    logic [RECW-1:0] raw;
    logic [$clog2(BUF_DEPTH+1)-1:0] cnt;
    msg_fifo #(.WIDTH(RECW), .DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n,
      .in_valid (host_valid && turn == RW'(c)), .in_ready (b_in_ready[c]),
      .in_data  (host_rec),
      .out_valid(b_valid[c]), .out_ready(b_ready[c]), .out_data(raw),
      .count    (cnt)
    );
    assign b_rec[c]    = io_rec_t'(raw);
    assign b_nempty[c] = (cnt != '0);

    io_cell u_cell (
      .clk, .rst_n, .start,
      .rec_valid(b_valid[c]), .rec_ready(b_ready[c]), .rec(b_rec[c]),
      .out_valid(out_valid[c]), .out_ready(out_ready[c]), .out_flit(out_flit[c]),
      .sent     (c_sent[c])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        turn <= '0;
    else if (host_valid && host_ready) turn <= (turn == RW'(NCELLS - 1)) ? '0 : turn + 1'b1;
  end

  always_comb begin
    sent = '0;
    for (int c = 0; c < NCELLS; c++) sent = sent + c_sent[c];
  end
  assign empty = !(|b_nempty) && !(|out_valid);
endmodule
