// tb_ugpq -- self-checking testbench for the class queue (ugpq).
//
// Runs a directed sequence taken from the two-level example of the model
// (classes A..D with ranks 7, 4, 3, 2, then A updated to rank 1), checks
// first-in first-out order among equal ranks and the Hold rule (an update
// with an unchanged rank keeps the class's place), and then runs random
// update/pop traffic against a reference queue written with SystemVerilog
// queues. After every operation the head, the head rank and the class count
// are compared with the reference, and the spacing between two accepted
// operations is checked to be three cycles.
module tb_ugpq;
  import uifo_pkg::*;

  localparam int unsigned CLASS_W = 4;
  localparam int unsigned CRANK_W = 3;

  logic               clk = 1'b0;
  logic               rst_n = 1'b0;
  logic               op_valid = 1'b0;
  logic               op_ready;
  cq_op_e             op = CQ_NOP;
  logic [CLASS_W-1:0] op_cid = '0;
  logic [CRANK_W-1:0] op_rank = '0;
  logic               head_valid;
  logic [CLASS_W-1:0] head_cid;
  logic [CRANK_W-1:0] head_rank;
  logic [CLASS_W:0]   count;

  int checks = 0;
  int failures = 0;

  ugpq #(.CLASS_W(CLASS_W), .CRANK_W(CRANK_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model
  typedef struct { int cid; int rank; } ce_t;
  ce_t ref_q[$];

  function automatic void ref_update(int cid, int rank);
    int pos;
    foreach (ref_q[i]) begin
      if (ref_q[i].cid == cid) begin
        if (ref_q[i].rank == rank) return;   // Hold
        ref_q.delete(i);
        break;
      end
    end
    pos = 0;
    foreach (ref_q[i]) if (ref_q[i].rank <= rank) pos = i + 1;
    ref_q.insert(pos, '{cid, rank});
  endfunction

  function automatic void ref_pop();
    if (ref_q.size() > 0) void'(ref_q.pop_front());
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic do_op(cq_op_e o, int cid, int rank);
    int cyc;
    @(negedge clk);
    while (!op_ready) @(negedge clk);
    op_valid = 1'b1;
    op       = o;
    op_cid   = CLASS_W'(cid);
    op_rank  = CRANK_W'(rank);
    @(negedge clk);
    op_valid = 1'b0;
    cyc = 1;
    while (!op_ready) begin
      @(negedge clk);
      cyc++;
    end
    check("three cycles per operation", cyc == OP_CYCLES);
    if (o == CQ_UPDATE) ref_update(cid, rank);
    else if (o == CQ_POP) ref_pop();
    check("count", count == (CLASS_W+1)'(ref_q.size()));
    check("head valid", head_valid == (ref_q.size() > 0));
    if (ref_q.size() > 0) begin
      check("head class", head_cid == CLASS_W'(ref_q[0].cid));
      check("head rank", head_rank == CRANK_W'(ref_q[0].rank));
    end
  endtask

  localparam int A = 0, B = 1, C = 2, D = 3;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // example: A:7 D:4 C:3 B:2 -> B C D A; then A updated to 1 -> A B C D
    do_op(CQ_UPDATE, A, 7);
    do_op(CQ_UPDATE, D, 4);
    do_op(CQ_UPDATE, C, 3);
    do_op(CQ_UPDATE, B, 2);
    check("B heads the list", head_cid == CLASS_W'(B));
    do_op(CQ_UPDATE, A, 1);
    check("A moved to the head", head_cid == CLASS_W'(A) && head_rank == 3'd1);
    // Hold: B keeps its place in front of a later class of equal rank
    do_op(CQ_UPDATE, 5, 2);
    do_op(CQ_UPDATE, B, 2);
    do_op(CQ_POP, 0, 0);      // A
    check("B ahead of tie after hold", head_cid == CLASS_W'(B));
    do_op(CQ_POP, 0, 0);      // B
    check("tie served FIFO", head_cid == CLASS_W'(5));
    // re-ranking to an equal rank moves the class behind its peers
    do_op(CQ_UPDATE, 6, 3);   // list: 5:2 C:3 6:3 D:4
    do_op(CQ_UPDATE, 5, 3);   // 5 moves behind C and 6
    check("update to a tie goes to the tail of the tie", head_cid == CLASS_W'(C));
    while (ref_q.size() > 0) do_op(CQ_POP, 0, 0);
    do_op(CQ_POP, 0, 0);      // pop on empty: no effect
    check("empty after pops", !head_valid && count == '0);

    // random traffic
    for (int n = 0; n < 3000; n++) begin
      if (($urandom % 3) == 0) do_op(CQ_POP, 0, 0);
      else do_op(CQ_UPDATE, int'($urandom % (1 << CLASS_W)), int'($urandom % (1 << CRANK_W)));
    end
    // drain in order
    while (ref_q.size() > 0) do_op(CQ_POP, 0, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
