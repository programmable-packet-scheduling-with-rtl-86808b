// tb_uifo_policies -- scheduling policies programmed onto the UIFO scheduler.
//
// The testbench plays the part of the rank calculators and of the dequeue
// controller, and checks the service each policy must give, using models of
// the policies themselves rather than of the scheduler:
//
//   pFabric   class = flow, c.rank = remaining flow size carried by each
//             packet, e.rank constant. Check: every dequeued packet belongs
//             to a flow whose latest remaining size is the smallest among the
//             flows with buffered packets, and packets of a flow leave in
//             order.
//   PFC       class = priority queue, c.rank = the queue's send time (0 when
//             never paused). A pause frame is a rank-only enqueue with
//             c.rank = now + pause; data packets re-announce the queue's send
//             time (Hold). The controller dequeues only when the head class's
//             rank is <= now. Checks: no packet leaves a paused queue, the
//             link is never left idle while an unpaused queue holds packets,
//             and packets of a queue leave in order.
//   DRR       class = flow, e.rank constant, packet sizes kept by the
//             controller. A class is placed at the tail with a rank from an
//             increasing counter, when it becomes active and when its deficit
//             cannot cover its head packet (a rank-only enqueue). Check: the
//             sequence of packets sent equals that of a textbook
//             deficit-round-robin model with its own active list.
//
// Size: 16 classes, 16-bit class ranks, 16 element ranks, 256 elements.
module tb_uifo_policies;
  import uifo_pkg::*;

  localparam int unsigned CLASS_W  = 4;
  localparam int unsigned CRANK_W  = 16;
  localparam int unsigned ERANK_W  = 4;
  localparam int unsigned EID_W    = 8;
  localparam int          NF       = 8;    // flows / queues used

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

  uifo #(
    .CLASS_W(CLASS_W), .CRANK_W(CRANK_W), .ERANK_W(ERANK_W), .EID_W(EID_W)
  ) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic wait_ready();
    @(negedge clk);
    while (!enq_ready) @(negedge clk);
  endtask

  task automatic enq(int cid, int crank, bit push, int eid);
    wait_ready();
    enq_valid = 1'b1;
    enq_cid   = CLASS_W'(cid);
    enq_crank = CRANK_W'(crank);
    enq_push  = push;
    enq_erank = '0;
    enq_eid   = EID_W'(eid);
    @(negedge clk);
    enq_valid = 1'b0;
  endtask

  task automatic deq(output bit found, output int eid, output int cid);
    wait_ready();
    deq_valid = 1'b1;
    @(negedge clk);
    deq_valid = 1'b0;
    while (!out_valid) @(negedge clk);
    found = out_found;
    eid   = int'(out_eid);
    cid   = int'(out_cid);
  endtask

  // per-flow FIFO of Element IDs held by the controller, and the class rank
  // the controller last gave each flow (DRR)
  int fq [NF][$];
  int last_rank [NF];
  int free_ids[$];   // Element IDs not in the scheduler (they must be unique)

  function automatic int new_id();
    return free_ids.pop_front();
  endfunction

  function automatic int buffered();
    buffered = 0;
    for (int f = 0; f < NF; f++) buffered += fq[f].size();
  endfunction

  task automatic drain_check_empty();
    // the scheduler must be empty once the controller has nothing buffered
    wait_ready();
    check("scheduler empty after the phase", elem_count == '0);
  endtask

  // ---------------------------------------------------------------- pFabric
  task automatic run_pfabric();
    int  remaining [NF];
    int  announced [NF];
    int  sent = 0;
    bit  found;
    int  eid, cid;
    for (int f = 0; f < NF; f++) remaining[f] = 0;
    for (int n = 0; n < 3000; n++) begin
      if (($urandom % 100) < 55 && buffered() < 200) begin
        int f, id;
        f = int'($urandom % NF);
        if (remaining[f] == 0) remaining[f] = 20 + int'($urandom % 200);
        remaining[f]--;
        announced[f] = remaining[f];
        id = new_id();
        fq[f].push_back(id);
        enq(f, remaining[f], 1, id);
      end else if (buffered() > 0) begin
        int best;
        best = -1;
        for (int f = 0; f < NF; f++)
          if (fq[f].size() > 0 && (best < 0 || announced[f] < best)) best = announced[f];
        deq(found, eid, cid);
        check("pFabric: a packet is sent", found);
        check("pFabric: flow with the smallest remaining size", announced[cid] == best);
        check("pFabric: in order within the flow", fq[cid].size() > 0 && fq[cid][0] == eid);
        if (fq[cid].size() > 0) void'(fq[cid].pop_front());
        free_ids.push_back(eid);
        sent++;
      end
    end
    while (buffered() > 0) begin
      deq(found, eid, cid);
      check("pFabric drain: in order", found && fq[cid].size() > 0 && fq[cid][0] == eid);
      if (fq[cid].size() > 0) void'(fq[cid].pop_front());
        free_ids.push_back(eid);
    end
    drain_check_empty();
    $display("pFabric: %0d packets sent during traffic", sent);
  endtask

  // -------------------------------------------------------------------- PFC
  task automatic run_pfc();
    int  send_time [NF];
    int  now = 1;
    int  n_pause = 0, n_held = 0, n_sent = 0;
    bit  found;
    int  eid, cid;
    for (int f = 0; f < NF; f++) send_time[f] = 0;
    for (int n = 0; n < 3000; n++) begin
      int r;
      r = int'($urandom % 100);
      if (r < 5) begin
        int f;
        f = int'($urandom % NF);
        send_time[f] = now + 5 + int'($urandom % 40);
        enq(f, send_time[f], 0, 0);               // pause frame: rank only
        n_pause++;
      end else if (r < 50 && buffered() < 200) begin
        int f, id;
        f  = int'($urandom % NF);
        id = new_id();
        fq[f].push_back(id);
        enq(f, send_time[f], 1, id);              // data packet: Hold
      end else begin
        bit any_eligible;
        any_eligible = 1'b0;
        for (int f = 0; f < NF; f++)
          if (fq[f].size() > 0 && send_time[f] <= now) any_eligible = 1'b1;
        wait_ready();
        if (head_valid && int'(head_crank) <= now) begin
          deq(found, eid, cid);
          if (found) begin
            check("PFC: never from a paused queue", send_time[cid] <= now);
            check("PFC: in order within the queue", fq[cid].size() > 0 && fq[cid][0] == eid);
            if (fq[cid].size() > 0) void'(fq[cid].pop_front());
        free_ids.push_back(eid);
            n_sent++;
          end
        end else begin
          check("PFC: idle only when every queue with packets is paused", !any_eligible);
          n_held++;
        end
      end
      if (n % 4 == 0) now++;
    end
    // let every pause expire and drain
    now += 100;
    while (buffered() > 0) begin
      deq(found, eid, cid);
      if (found) begin
        check("PFC drain: in order", fq[cid].size() > 0 && fq[cid][0] == eid);
        if (fq[cid].size() > 0) void'(fq[cid].pop_front());
        free_ids.push_back(eid);
      end
    end
    while (class_count != '0) deq(found, eid, cid);  // empty paused classes
    drain_check_empty();
    $display("PFC: %0d pauses, %0d packets sent, %0d idle decisions", n_pause, n_sent, n_held);
    check("PFC: pauses occurred", n_pause > 0);
    check("PFC: link held idle at least once", n_held > 0);
  endtask

  // -------------------------------------------------------------------- DRR
  task automatic run_drr();
    localparam int Q = 8;
    int  size_of [1 << EID_W];
    int  tail_rank = 0;
    bit  active [NF];
    // textbook model
    int  m_list[$];
    int  m_def [NF];
    bit  m_visit;
    int  h_def [NF];
    bit  h_visit;
    int  h_cid;
    int  n_sent = 0, n_moves = 0;
    bit  found;
    int  eid, cid;
    for (int f = 0; f < NF; f++) begin
      active[f] = 1'b0; m_def[f] = 0; h_def[f] = 0;
    end
    m_visit = 1'b0; h_visit = 1'b0; h_cid = -1;
    for (int n = 0; n < 4000; n++) begin
      if (($urandom % 100) < 45 && buffered() < 200) begin
        int f, id;
        f  = int'($urandom % NF);
        id = new_id();
        size_of[id] = 1 + int'($urandom % (2 * Q));
        fq[f].push_back(id);
        // scheduler side: a newly active flow goes to the tail; an active
        // flow keeps its rank
        if (!active[f]) begin
          tail_rank++;
          active[f] = 1'b1;
          last_rank[f] = tail_rank;
        end
        enq(f, last_rank[f], 1, id);
        // model side
        if (!(f inside {m_list})) m_list.push_back(f);
      end else if (m_list.size() > 0) begin
        int mf, exp_id;
        // model step
        mf = m_list[0];
        if (!m_visit) begin m_def[mf] += Q; m_visit = 1'b1; end
        exp_id = -1;
        if (fq[mf].size() > 0 && size_of[fq[mf][0]] <= m_def[mf]) begin
          exp_id = fq[mf][0];
          m_def[mf] -= size_of[exp_id];
          if (fq[mf].size() == 1) begin
            m_def[mf] = 0;
            void'(m_list.pop_front());
            m_visit = 1'b0;
          end
        end else begin
          void'(m_list.pop_front());
          m_list.push_back(mf);
          m_visit = 1'b0;
        end
        // scheduler step, driven only by what the scheduler shows
        wait_ready();
        check("DRR: a class is at the head", head_valid);
        if (!h_visit || h_cid != int'(head_cid)) begin
          h_cid = int'(head_cid);
          h_def[h_cid] += Q;
          h_visit = 1'b1;
        end
        if (fq[h_cid].size() > 0 && size_of[fq[h_cid][0]] <= h_def[h_cid]) begin
          deq(found, eid, cid);
          check("DRR: same packet as the reference", found && eid == exp_id);
          check("DRR: packet from the visited flow", cid == h_cid);
          h_def[h_cid] -= size_of[eid];
          void'(fq[h_cid].pop_front());
          free_ids.push_back(eid);
          if (fq[h_cid].size() == 0) begin
            h_def[h_cid] = 0;
            active[h_cid] = 1'b0;
            h_visit = 1'b0;
          end
          n_sent++;
        end else begin
          check("DRR: reference also moves the flow", exp_id == -1);
          tail_rank++;
          last_rank[h_cid] = tail_rank;
          enq(h_cid, tail_rank, 0, 0);              // move to the tail
          h_visit = 1'b0;
          n_moves++;
        end
      end
    end
    $display("DRR: %0d packets sent, %0d round-robin moves", n_sent, n_moves);
    check("DRR: deficit moves occurred", n_moves > 0);
  endtask


  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    while (!init_done) @(negedge clk);
    for (int i = 0; i < (1 << EID_W); i++) free_ids.push_back(i);
    run_pfabric();
    run_pfc();
    run_drr();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
