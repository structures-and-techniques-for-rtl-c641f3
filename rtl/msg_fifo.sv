// msg_fifo: synchronous first-in first-out buffer with a valid/ready handshake
// on both sides.
//
// Holds up to DEPTH words of WIDTH bits in a circular array. A word is written
// when in_valid and in_ready are both high and read when out_valid and
// out_ready are both high; both may happen in the same cycle. out_data shows
// the oldest word combinationally from the array, so a word written in one
// cycle can be read in the next. With FALLTHROUGH set, a word arriving at an
// empty buffer is offered on the output in the same cycle and, if taken,
// never stored; this lets a router pass a flit on in the cycle it arrives.
// in_ready depends only on the occupancy, never on out_ready, unless
// PASS_READY is set: then a full buffer also accepts a word in a cycle in
// which one leaves (used only where no combinational loop can form). Reset
// empties it. This buffer is a helper of
// this design; the paper does not describe queue structures.
module msg_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4,
  parameter bit          FALLTHROUGH = 1'b0,
  parameter bit          PASS_READY  = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;
  logic             do_wr, do_rd, bypass;

  // bypass: empty buffer, word arriving, and it is taken at once
  assign bypass    = FALLTHROUGH && (count == '0) && in_valid;
  assign in_ready  = (count < DEPTH[$clog2(DEPTH+1)-1:0]) ||
                     (PASS_READY && out_ready && count != '0);
  assign out_valid = (count != '0) || bypass;
  assign out_data  = (count == '0 && FALLTHROUGH) ? in_data : mem[rd_ptr];
  assign do_wr     = in_valid && in_ready && !(bypass && out_ready);
  assign do_rd     = (count != '0) && out_ready;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= inc(wr_ptr);
      if (do_rd) rd_ptr <= inc(rd_ptr);
      if (do_wr && !do_rd)      count <= count + 1'b1;
      else if (do_rd && !do_wr) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  // The occupancy never exceeds the capacity.
  a_count_bound: assert property (@(posedge clk) disable iff (!rst_n)
    count <= DEPTH[$clog2(DEPTH+1)-1:0]);
endmodule
