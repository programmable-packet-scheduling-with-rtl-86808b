// tb_uifo_full -- the UIFO scheduler at its default size, end to end.
//
// Same checks as the reduced testbench, with the scheduler's own defaults
// (256 classes, 256 class ranks, 256 element ranks, 65536 elements): the
// 65536-cycle initialisation sweep, the pFabric example, the two-level
// example with classes A..D, rank-only updates, empty dequeues, simultaneous
// requests, one class filled with 3000 elements spread over all element ranks
// and drained in order, and 20000 random operations against the reference
// model, with every operation checked to take three cycles.
module tb_uifo_full;
  import uifo_pkg::*;
  import uifo_ref_pkg::*;

  // the scheduler's defaults: 256 classes, 256 class ranks, 256 element
  // ranks, 65536 elements, bitmap width 4
  localparam int unsigned CLASS_W  = CLASS_W_DEF;
  localparam int unsigned CRANK_W  = CRANK_W_DEF;
  localparam int unsigned ERANK_W  = ERANK_W_DEF;
  localparam int unsigned EID_W    = EID_W_DEF;

  logic               clk = 1'b0;
  logic               rst_n = 1'b0;
  logic               init_done;
  logic               enq_valid = 1'b0;
  logic               enq_ready;
  logic [CLASS_W-1:0] enq_cid = '0;
  logic [CRANK_W-1:0] enq_crank = '0;
  logic               enq_push = 1'b0;
  logic [ERANK_W-1:0] enq_erank = '0;
  logic [EID_W-1:0]   enq_eid = '0;
  logic               deq_valid = 1'b0;
  logic               deq_ready;
  logic               out_valid, out_found;
  logic [EID_W-1:0]   out_eid;
  logic [CLASS_W-1:0] out_cid;
  logic [ERANK_W-1:0] out_erank;
  logic               head_valid;
  logic [CLASS_W-1:0] head_cid;
  logic [CRANK_W-1:0] head_crank;
  logic [CLASS_W:0]   class_count;
  logic [EID_W:0]     elem_count;

  int checks = 0;
  int failures = 0;
  int n_conflict = 0;

  uifo dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  uifo_ref m = new();
  int      free_ids[$];
  int      cur_rank [int];

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic check_state();
    check("class count", class_count == (CLASS_W+1)'(m.cl.size()));
    check("element count", elem_count == (EID_W+1)'(m.n_elems));
    check("head valid", head_valid == (m.cl.size() > 0));
    if (m.cl.size() > 0) begin
      check("head class", head_cid == CLASS_W'(m.cl[0].cid));
      check("head rank", head_crank == CRANK_W'(m.cl[0].rank));
    end
  endtask

  // wait in the negedge half until the scheduler can take an operation
  task automatic wait_ready();
    @(negedge clk);
    while (!enq_ready) @(negedge clk);
  endtask

  // cycles from an accept until the scheduler is ready again
  task automatic finish_op();
    int cyc;
    @(negedge clk);
    enq_valid = 1'b0;
    deq_valid = 1'b0;
    cyc = 1;
    while (!enq_ready) begin
      @(negedge clk);
      cyc++;
    end
    check("three cycles per operation", cyc == OP_CYCLES);
  endtask

  task automatic enq(int cid, int crank, bit push, int erank, int eid);
    wait_ready();
    enq_valid = 1'b1;
    enq_cid   = CLASS_W'(cid);
    enq_crank = CRANK_W'(crank);
    enq_push  = push;
    enq_erank = ERANK_W'(erank);
    enq_eid   = EID_W'(eid);
    finish_op();
    m.enqueue(cid, crank, push, erank, eid);
    cur_rank[cid] = crank;
    check_state();
  endtask

  // dequeue; returns the Element ID or -1
  task automatic deq(output int eid);
    deq_t r;
    int   lat;
    wait_ready();
    check("dequeue ready", deq_ready);
    deq_valid = 1'b1;
    fork
      finish_op();
      begin
        lat = 0;
        do begin
          @(posedge clk);
          #1;
          lat++;
        end while (!out_valid);
        check("dequeue latency three cycles", lat == OP_CYCLES);
      end
    join
    r = m.dequeue();
    check("found", out_found == r.found);
    eid = -1;
    if (r.found) begin
      check("element", out_eid == EID_W'(r.eid));
      check("class", out_cid == CLASS_W'(r.cid));
      check("e.rank", out_erank == ERANK_W'(r.erank));
      eid = r.eid;
    end
    check_state();
  endtask

  function automatic int take_id();
    int k, id;
    k  = int'($urandom % free_ids.size());
    id = free_ids[k];
    free_ids.delete(k);
    return id;
  endfunction

  int e;
  int init_cycles;
  int order[$];
  int want[$];

  function automatic logic same(int a[$], int b[$]);
    if (a.size() != b.size()) return 1'b0;
    foreach (a[i]) if (a[i] != b[i]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    init_cycles = 0;
    while (!init_done) begin
      @(negedge clk);
      init_cycles++;
    end
    check("initialisation sweep over all 65536 leaf counters", init_cycles == 65536);
    for (int i = 0; i < (1 << EID_W); i++) free_ids.push_back(i);

    // ---- pFabric example: flow0 pkt1 (remaining 9), flow0 pkt2 (8),
    // flow2 pkt1 (7); then flow0 pkt3 arrives with remaining size 6
    enq(0, 9, 1, 0, 1);
    enq(0, 8, 1, 0, 2);
    enq(2, 7, 1, 0, 3);
    check("pFabric: flow2 first before the update", head_cid == 8'd2);
    enq(0, 6, 1, 0, 4);
    check("pFabric: flow0 first after the update", head_cid == 8'd0);
    order = {};
    repeat (4) begin deq(e); order.push_back(e); end
    want = '{1, 2, 4, 3};
    check("pFabric order flow0 pkt1, pkt2, pkt3, flow2 pkt1", same(order, want));

    // ---- two-level example: A:7 {a0:5}, B:2 {b0:2,b1:4,b2:6},
    // C:3 {c0:4}, D:4 {d0:3,d1:7}; then a1 (e.rank 1) arrives with A:1
    enq(0, 7, 1, 5, 10);   // a0
    enq(1, 2, 1, 6, 22);   // b2
    enq(1, 2, 1, 4, 21);   // b1
    enq(1, 2, 1, 2, 20);   // b0
    enq(2, 3, 1, 4, 30);   // c0
    enq(3, 4, 1, 3, 40);   // d0
    enq(3, 4, 1, 7, 41);   // d1
    enq(0, 1, 1, 1, 11);   // a1 with Update-In of A to 1
    order = {};
    repeat (8) begin deq(e); order.push_back(e); end
    want = '{11, 10, 20, 21, 22, 30, 40, 41};
    check("example order a1 a0 b0 b1 b2 c0 d0 d1", same(order, want));

    // ---- rank-only update of a class with no elements, then served
    enq(5, 3, 1, 0, 50);
    enq(6, 1, 0, 0, 0);     // empty class 6 at the head
    deq(e); check("empty head class returns nothing", e == -1);
    deq(e); check("then class 5", e == 50);
    deq(e); check("empty scheduler returns nothing", e == -1);

    // ---- enqueue and dequeue requested in the same cycle
    enq(7, 2, 1, 0, 70);
    wait_ready();
    enq_valid = 1'b1; enq_cid = 8'd8; enq_crank = 8'd1; enq_push = 1'b1;
    enq_erank = '0; enq_eid = 16'd80;
    deq_valid = 1'b1;
    #1;
    check("dequeue waits behind a simultaneous enqueue", !deq_ready);
    n_conflict++;
    @(negedge clk);
    enq_valid = 1'b0;
    m.enqueue(8, 1, 1, 0, 80);
    deq_valid = 1'b0;
    deq(e); check("enqueue went first", e == 80);
    deq(e); check("then the older class", e == 70);

    // ---- one class holding 3000 elements over all 256 e.ranks
    for (int n = 0; n < 3000; n++) enq(200, 100, 1, int'($urandom % 256), take_id());
    for (int n = 0; n < 3000; n++) begin
      deq(e);
      if (e >= 0) free_ids.push_back(e);
    end

    // ---- random traffic
    for (int n = 0; n < 20000; n++) begin
      int r, cid, crank;
      r   = int'($urandom % 100);
      cid = int'($urandom % (1 << CLASS_W));
      if (cur_rank.exists(cid) && ($urandom % 3) == 0) crank = cur_rank[cid];
      else crank = int'($urandom % (1 << CRANK_W));
      if (r < 50 && free_ids.size() > 0)
        enq(cid, crank, 1, int'($urandom % (1 << ERANK_W)), take_id());
      else if (r < 55)
        enq(cid, crank, 0, 0, 0);
      else begin
        deq(e);
        if (e >= 0) free_ids.push_back(e);
      end
    end
    while (m.cl.size() > 0) begin
      deq(e);
    end
    check("drained", elem_count == '0 && !head_valid);

    $display("mechanisms: push_in=%0d new_class=%0d update_in=%0d hold=%0d rank_only=%0d reorder=%0d",
             m.n_push_in, m.n_new_class, m.n_update_in, m.n_hold, m.n_rank_only, m.n_reorder);
    $display("            first_out=%0d class_pop=%0d empty_head=%0d empty_sched=%0d conflict=%0d",
             m.n_first_out, m.n_class_pop, m.n_empty_head, m.n_empty_sched, n_conflict);
    check("Push-In occurred",        m.n_push_in > 0);
    check("new class occurred",      m.n_new_class > 0);
    check("Update-In occurred",      m.n_update_in > 0);
    check("Hold occurred",           m.n_hold > 0);
    check("rank-only update occurred", m.n_rank_only > 0);
    check("reordering occurred",     m.n_reorder > 0);
    check("First-Out occurred",      m.n_first_out > 0);
    check("class pop occurred",      m.n_class_pop > 0);
    check("empty head class occurred", m.n_empty_head > 0);
    check("empty scheduler occurred", m.n_empty_sched > 0);
    check("simultaneous requests occurred", n_conflict > 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
