// future_lco: next-state logic of the future local control object (LCO) that
// guards a vertex object's ghost pointer.
//
// A future holds a state, a value and a queue of closures (Fig. 6 of the
// paper): (0) null with an empty queue; (1) the first action that needs the
// value moves it to pending and queues its closure; (2) later dependent
// actions queue their closures too; (3) the continuation returning from the
// remote allocation sets the value, the queue still full; (4) the dependent
// closures are scheduled and the queue empties. Here a closure is the edge
// target of an insert that waits for the ghost. The block is combinational:
// the caller presents the stored future and one operation and writes back
// `nxt` in the same cycle.
//   op 1, await  queue `closure`; `need_alloc` is high when this is the first
//                waiter (null -> pending), so the caller starts the
//                allocation; `full` is high (and nothing changes) when the
//                queue has no room; `ready` is high when the value is already
//                set, and nothing changes either.
//   op 2, set    store `value` and enter set, keeping the queue.
//   op 3, drain  remove the oldest closure, shown on `head`.
// The queue depth and the reject-when-full rule are this design's choices.
module future_lco
  import amcca_pkg::*;
(
  input  future_t    cur,
  input  logic [1:0] op,        // 0 none, 1 await, 2 set, 3 drain
  input  gaddr_t     closure,
  input  gaddr_t     value,
  output future_t    nxt,
  output logic       need_alloc,
  output logic       full,
  output logic       ready,
  output gaddr_t     head,
  output logic       empty
);
  localparam logic [1:0] FOP_AWAIT = 2'd1, FOP_SET = 2'd2, FOP_DRAIN = 2'd3;

  assign ready = (cur.state == FUT_SET);
  assign full  = (cur.qcnt == ($bits(cur.qcnt))'(FUTURE_Q));
  assign empty = (cur.qcnt == '0);
  assign head  = cur.closures[0];

  always_comb begin
    nxt        = cur;
    need_alloc = 1'b0;
    unique case (op)
      FOP_AWAIT: begin
        if (cur.state != FUT_SET && !full) begin
          nxt.closures[cur.qcnt] = closure;
          nxt.qcnt            = cur.qcnt + 1'b1;
          nxt.state           = FUT_PENDING;
          need_alloc          = (cur.state == FUT_NULL);
        end
      end
      FOP_SET: begin
        nxt.state = FUT_SET;
        nxt.value = value;
      end
      FOP_DRAIN: begin
        if (!empty) begin
          for (int i = 0; i < FUTURE_Q - 1; i++) nxt.closures[i] = cur.closures[i+1];
          nxt.closures[FUTURE_Q-1] = '0;
          nxt.qcnt              = cur.qcnt - 1'b1;
        end
      end
      default: ;
    endcase
  end
endmodule
