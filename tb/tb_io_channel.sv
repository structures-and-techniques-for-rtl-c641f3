// tb_io_channel: a channel of 4 IO cells with 4-record buffers. The host
// loads 16 records; the 17th must stall (all buffers full). After start,
// cell c must send records c, c+4, c+8, c+12 in order as the matching
// actions, all four cells sending in the same cycles (4 actions per cycle,
// so the 16 records leave in 4 cycles), after which the channel is empty.
module tb_io_channel;
  import amcca_pkg::*;
  localparam int NC = 4, BD = 4, N = NC * BD;

  logic clk = 0, rst_n = 0, start = 0, host_valid = 0, host_ready, empty;
  io_rec_t host_rec;
  logic [NC-1:0] out_valid, out_ready = '1;
  flit_t out_flit [NC];
  logic [31:0] sent;
  int checks = 0, failures = 0;

  io_channel #(.NCELLS(NC), .BUF_DEPTH(BD)) dut (
    .clk, .rst_n, .start, .host_valid, .host_ready, .host_rec,
    .out_valid, .out_ready, .out_flit, .empty, .sent);

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  io_rec_t recs [N];
  int ncell [NC];
  int cyc = 0, first = -1, last = -1;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++)
      if (out_valid[c] && out_ready[c]) begin
        msg_t m;
        int k;
        m = flit2msg(out_flit[c]);
        k = c + NC * ncell[c];
        check($sformatf("cell %0d sends record %0d", c, k),
              k < N && m.act == ACT_INSERT && m.dst == recs[k].src && m.arg == recs[k].dst);
        ncell[c]++;
        if (first < 0) first = cyc;
        last = cyc;
      end
  end

  initial begin
    for (int c = 0; c < NC; c++) ncell[c] = 0;
    for (int i = 0; i < N; i++) begin
      recs[i].seed = 1'b0;
      recs[i].src  = gaddr_t'($urandom);
      recs[i].dst  = gaddr_t'($urandom);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    check("empty after reset", empty);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      host_valid = 1; host_rec = recs[i];
      #1;
      check($sformatf("host accepted record %0d", i), host_ready);
    end
    @(negedge clk);
    host_rec = recs[0];
    #1;
    check("17th record stalls with all buffers full", !host_ready);
    host_valid = 0;
    repeat (3) @(posedge clk);
    check("nothing sent before start", sent == 0 && first < 0);
    @(negedge clk); start = 1;
    repeat (10) @(posedge clk);
    #1;
    check("all records sent", sent == N);
    for (int c = 0; c < NC; c++) check($sformatf("cell %0d sent 4", c), ncell[c] == BD);
    check("four actions per cycle: 16 records in 4 cycles", last - first == BD - 1);
    check("empty at the end", empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
