// uifo -- Update-In-First-Out packet scheduler (top level).
//
// What it does. Packets are scheduled in two levels. Each packet (element)
// belongs to a class; classes are ordered by a class rank c.rank, and inside a
// class elements are ordered by an element rank e.rank (smaller rank = served
// earlier; equal ranks are served first-in first-out at both levels). Every
// enqueue carries the class's current c.rank, so a new packet can move its
// whole class -- and with it every packet of that class already buffered --
// forward or backward in the service order. A dequeue always returns the best
// element of the best class.
//
//   enqueue(e):  Push-In   - the element goes into its class's element_list
//                            (the MPQG), ordered by e.rank;
//                Update-In - the class is inserted into the class_list (the
//                            UG-PQ) with c.rank, or moved to its new c.rank;
//                Hold      - if c.rank is unchanged the class keeps its place.
//   dequeue():   First-Index - the head class of the class_list is taken;
//                First-Out   - its best element is removed from the MPQG; if
//                              that empties the class, the class is popped
//                              from the class_list in the same operation.
//
// An enqueue with enq_push = 0 only sets the class's rank and files no element
// (for control events such as a flow-control pause, or a round-robin
// requeue). If such an update leaves an empty class at the head, the next
// dequeue removes that class and returns out_found = 0.
//
// Structure. The UG-PQ and the MPQG work side by side in lock step. Both take
// three cycles per operation, so the scheduler accepts one operation (an
// enqueue or a dequeue) every third cycle: enq_ready / deq_ready are high
// together one cycle in three. For a dequeue the controller reads the head
// class and, from the MPQG's class-level counter, that class's element count
// in the accept cycle; when the count is at most 1 it issues the UG-PQ pop
// together with the MPQG pop, so the class leaves the class_list in the same
// three cycles. The dequeue result (out_valid for one cycle) appears three
// cycles after the accept, which is also the next accept cycle.
//
// Interface. Enqueue: enq_valid/enq_ready with Class ID, c.rank, Element ID,
// e.rank and enq_push. Dequeue: deq_valid/deq_ready; if both requests are
// valid in the same accept cycle the enqueue goes first. The head class and
// its rank are outputs so that a non-work-conserving policy outside can gate
// dequeues on it (e.g. dequeue only when head c.rank <= current time). After
// reset the MPQG clears its counters (2**(CLASS_W+ERANK_W) cycles); init_done
// rises when it has finished. Reset is synchronous and active low.
//
// The two-level structure, the Push-In / Update-In / Hold / First-Index /
// First-Out behaviour, the pop of the class triggered from the MPQG's class
// level and the three-cycle operation follow the published design. The
// ready/valid handshake, the enqueue-first arbitration, the rank-only
// enqueue flag and the empty-class dequeue result are this design's choices.
module uifo
  import uifo_pkg::*;
#(
  parameter int unsigned CLASS_W  = CLASS_W_DEF,   // 256 classes
  parameter int unsigned CRANK_W  = CRANK_W_DEF,   // 256 class ranks
  parameter int unsigned ERANK_W  = ERANK_W_DEF,   // 256 element ranks
  parameter int unsigned EID_W    = EID_W_DEF,     // capacity 65536 elements
  parameter int unsigned BITMAP_W = BITMAP_W_DEF   // bitmap width of the MPQG tree
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic               init_done,
  // enqueue (from the rank calculators)
  input  logic               enq_valid,
  output logic               enq_ready,
  input  logic [CLASS_W-1:0] enq_cid,
  input  logic [CRANK_W-1:0] enq_crank,
  input  logic               enq_push,    // 1: file an element; 0: rank update only
  input  logic [ERANK_W-1:0] enq_erank,
  input  logic [EID_W-1:0]   enq_eid,
  // dequeue request (from the egress side)
  input  logic               deq_valid,
  output logic               deq_ready,
  // dequeue result (Element ID to the packet buffer)
  output logic               out_valid,
  output logic               out_found,
  output logic [EID_W-1:0]   out_eid,
  output logic [CLASS_W-1:0] out_cid,
  output logic [ERANK_W-1:0] out_erank,
  // state
  output logic               head_valid,
  output logic [CLASS_W-1:0] head_cid,
  output logic [CRANK_W-1:0] head_crank,
  output logic [CLASS_W:0]   class_count,
  output logic [EID_W:0]     elem_count
);

  logic               cq_ready, eq_ready, ready;
  logic               cq_valid, eq_valid;
  cq_op_e             cq_op;
  eq_op_e             eq_op;
  logic [CLASS_W-1:0] cq_cid, eq_cid;
  logic [EID_W:0]     head_elems;
  logic               take_enq, take_deq;
  logic               out_cls_empty;

  assign ready     = cq_ready && eq_ready;
  assign enq_ready = ready;
  assign deq_ready = ready && !enq_valid;
  assign take_enq  = enq_valid && ready;
  assign take_deq  = deq_valid && deq_ready;

  always_comb begin
    cq_valid = 1'b0;
    cq_op    = CQ_NOP;
    cq_cid   = enq_cid;
    eq_valid = 1'b0;
    eq_op    = EQ_NOP;
    eq_cid   = enq_cid;
    if (take_enq) begin
      cq_valid = 1'b1;                 // Update-In (or Hold)
      cq_op    = CQ_UPDATE;
      eq_valid = enq_push;             // Push-In
      eq_op    = EQ_PUSH;
    end else if (take_deq) begin
      eq_valid = 1'b1;                 // First-Index + First-Out
      eq_op    = EQ_POP;
      eq_cid   = head_cid;
      cq_cid   = head_cid;
      if (head_valid && head_elems <= (EID_W+1)'(1)) begin
        cq_valid = 1'b1;               // class empties: pop it
        cq_op    = CQ_POP;
      end
    end
  end

  ugpq #(
    .CLASS_W (CLASS_W),
    .CRANK_W (CRANK_W)
  ) u_ugpq (
    .clk        (clk),
    .rst_n      (rst_n),
    .op_valid   (cq_valid),
    .op_ready   (cq_ready),
    .op         (cq_op),
    .op_cid     (cq_cid),
    .op_rank    (enq_crank),
    .head_valid (head_valid),
    .head_cid   (head_cid),
    .head_rank  (head_crank),
    .count      (class_count)
  );

  mpqg #(
    .CLASS_W  (CLASS_W),
    .ERANK_W  (ERANK_W),
    .EID_W    (EID_W),
    .BITMAP_W (BITMAP_W)
  ) u_mpqg (
    .clk           (clk),
    .rst_n         (rst_n),
    .init_done     (init_done),
    .op_valid      (eq_valid),
    .op_ready      (eq_ready),
    .op            (eq_op),
    .op_cid        (eq_cid),
    .op_erank      (enq_erank),
    .op_eid        (enq_eid),
    .cls_cid       (head_cid),
    .cls_count     (head_elems),
    .out_valid     (out_valid),
    .out_found     (out_found),
    .out_cid       (out_cid),
    .out_erank     (out_erank),
    .out_eid       (out_eid),
    .out_cls_empty (out_cls_empty),
    .total         (elem_count)
  );

  // The class_list and the element store stay consistent: a dequeue result
  // that empties its class coincides with that class having left the
  // class_list, and a found element always belongs to the class served.
  logic [CLASS_W-1:0] served_cid_q;
  always_ff @(posedge clk) if (take_deq) served_cid_q <= head_cid;

  a_served_class: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && out_found) |-> (out_cid == served_cid_q))
    else $error("uifo: element returned from a class other than the head");
  a_pop_on_empty: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && out_cls_empty) |-> (!head_valid || head_cid != out_cid))
    else $error("uifo: emptied class still in the class_list");

endmodule
