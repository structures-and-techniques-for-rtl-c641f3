// tb_io_cell: feeds 40 records (edges and seeds) to an IO cell with random
// link back-pressure. Checks that nothing is sent before start, that each
// record becomes the right action (INSERT src->dst with level "not reached",
// or BFS src at level 0) in order, and that with a ready link one record
// leaves per cycle.
module tb_io_cell;
  import amcca_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic rec_valid, rec_ready, out_valid, out_ready = 1;
  io_rec_t rec;
  flit_t out_flit;
  logic [31:0] sent;
  int checks = 0, failures = 0;

  io_cell dut (.clk, .rst_n, .start, .rec_valid, .rec_ready, .rec, .out_valid, .out_ready,
               .out_flit, .sent);

  always #5 clk = ~clk;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  localparam int N = 40;
  io_rec_t recs [N];
  int nin = 0, nout = 0, first_cycle = -1, last_cycle = -1, cyc = 0;
  logic randomize_ready = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // record source
  always @(posedge clk) if (rst_n) begin
    if (rec_valid && rec_ready) nin <= nin + 1;
  end
  assign rec_valid = rst_n && (nin < N);
  assign rec       = recs[(nin < N) ? nin : 0];

  // link sink
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    msg_t m;
    m = flit2msg(out_flit);
    if (recs[nout].seed)
      check($sformatf("record %0d is a BFS seed", nout),
            m.act == ACT_BFS && m.dst == recs[nout].src && m.level == 0);
    else
      check($sformatf("record %0d is an insert", nout),
            m.act == ACT_INSERT && m.dst == recs[nout].src && m.arg == recs[nout].dst &&
            m.level == LEVEL_INF);
    if (nout == 0) first_cycle = cyc;
    if (nout == 19) last_cycle = cyc;
    nout <= nout + 1;
  end

  always @(negedge clk) out_ready = randomize_ready ? 1'($urandom) : 1'b1;

  initial begin
    for (int i = 0; i < N; i++) begin
      recs[i].seed = (i % 7 == 3);
      recs[i].src  = gaddr_t'($urandom);
      recs[i].dst  = gaddr_t'($urandom);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    check("nothing sent before start", nout == 0 && nin == 0 && !out_valid);
    @(negedge clk); start = 1;
    wait (nout == 20);
    check("one record per cycle with a ready link", last_cycle - first_cycle == 19);
    randomize_ready = 1;
    wait (nout == N);
    @(posedge clk); #1;
    check("sent counter", sent == N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
