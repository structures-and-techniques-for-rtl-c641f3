// tb_future_lco: walks the future LCO through the five states of its life
// (null, first waiter, more waiters, set, drained) and checks each state,
// the first-waiter flag, the queue order, the full-queue refusal and that an
// await on a set future changes nothing. Expected values are written out by
// hand from that sequence.
module tb_future_lco;
  import amcca_pkg::*;

  future_t    cur, nxt;
  logic [1:0] op;
  gaddr_t     closure, value, head;
  logic       need_alloc, full, ready, empty;
  int checks = 0, failures = 0;

  future_lco dut (.cur, .op, .closure, .value, .nxt, .need_alloc, .full, .ready, .head, .empty);

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic gaddr_t a(int n);
    return '{y: COORD_W'(n), x: COORD_W'(n + 1), slot: SLOT_W'(n + 2)};
  endfunction

  task automatic step(logic [1:0] o, gaddr_t c, gaddr_t v);
    op = o; closure = c; value = v;
    #1;
    cur = nxt;
  endtask

  initial begin
    cur = '0;
    cur.state = FUT_NULL;
    op = 0; closure = '0; value = '0;
    #1;
    check("null state", cur.state == FUT_NULL && empty && !ready && !full);
    // (1) first insert: pending, queue {l1}, allocation requested
    op = 2'd1; closure = a(1); value = '0; #1;
    check("first await asks for allocation", need_alloc);
    cur = nxt;
    check("pending after first await", cur.state == FUT_PENDING && cur.qcnt == 1);
    // (2) more dependants
    op = 2'd1; closure = a(2); #1;
    check("second await does not allocate", !need_alloc);
    cur = nxt;
    step(2'd1, a(3), '0);
    check("three closures queued", cur.state == FUT_PENDING && cur.qcnt == 3);
    step(2'd1, a(4), '0);
    op = 2'd1; closure = a(5); #1;
    check("full queue refuses", full && nxt == cur && !need_alloc);
    // (3) continuation returns with the address
    step(2'd2, '0, a(9));
    check("set keeps the queue", cur.state == FUT_SET && cur.value == a(9) && cur.qcnt == 4);
    op = 2'd1; closure = a(6); #1;
    check("await on set future is ready and changes nothing", ready && nxt == cur);
    // (4) dependants scheduled in order, queue empties
    for (int i = 1; i <= 4; i++) begin
      op = 2'd3; #1;
      check($sformatf("drain order %0d", i), head == a(i));
      cur = nxt;
    end
    #1;
    check("drained", empty && cur.qcnt == 0 && cur.state == FUT_SET && cur.value == a(9));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
