// io_cell: an IO Cell of an IO channel. It turns each record the host
// streamed in into an action and sends it to the compute cell it is wired to.
//
// Every cycle the cell can take one record from its buffer and present one
// message on its link, so a cell injects at most one edge per cycle, the rate
// the paper gives. An edge record (src, dst) becomes INSERT(src, arg=dst,
// level "not reached"), the insert-edge action addressed to the root vertex
// src; a seed record becomes BFS(src, level 0), which starts a BFS from src.
// The output is a registered valid/ready link: the flit stays until taken.
// Records are taken only while `start` is high. `sent` counts records sent.
// The seed record and the counter are this design's additions.
module io_cell
  import amcca_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  logic    rec_valid,
  output logic    rec_ready,
  input  io_rec_t rec,
  output logic    out_valid,
  input  logic    out_ready,
  output flit_t   out_flit,
  output logic [31:0] sent
);
  msg_t m;

  always_comb begin
    m.act   = rec.seed ? ACT_BFS : ACT_INSERT;
    m.dst   = rec.src;
    m.arg   = rec.seed ? gaddr_t'('0) : rec.dst;
    m.level = rec.seed ? level_t'('0) : LEVEL_INF;
  end

  assign rec_ready = start && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sent      <= '0;
    end else begin
      if (rec_valid && rec_ready) begin
        out_valid <= 1'b1;
        sent      <= sent + 1;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rec_valid && rec_ready) out_flit <= msg2flit(m);
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_flit));
endmodule
