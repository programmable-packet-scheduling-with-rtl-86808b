// tb_mpqg -- self-checking testbench for the multi-priority-queue group.
//
// Uses a reduced store (16 classes, 16 element ranks, 64 elements, bitmap
// width 4, so a four-level tree). Checks that the initialisation sweep takes
// one cycle per leaf counter, runs a directed sequence (the element lists of
// the model's two-level example), then random pushes and pops against a
// reference that keeps, per class, the elements in arrival order and pops the
// oldest of the smallest e.rank. Every pop result (found flag, Element ID,
// e.rank, class, "class emptied"), the element total and the per-class count
// are compared, and every operation must take three cycles. Element IDs are
// drawn from a free pool so that they stay unique, as the design requires.
module tb_mpqg;
  import uifo_pkg::*;

  localparam int unsigned CLASS_W  = 4;
  localparam int unsigned ERANK_W  = 4;
  localparam int unsigned EID_W    = 6;
  localparam int unsigned BITMAP_W = 4;
  localparam int unsigned NEL      = 1 << EID_W;

  logic               clk = 1'b0;
  logic               rst_n = 1'b0;
  logic               init_done;
  logic               op_valid = 1'b0;
  logic               op_ready;
  eq_op_e             op = EQ_NOP;
  logic [CLASS_W-1:0] op_cid = '0;
  logic [ERANK_W-1:0] op_erank = '0;
  logic [EID_W-1:0]   op_eid = '0;
  logic [CLASS_W-1:0] cls_cid = '0;
  logic [EID_W:0]     cls_count;
  logic               out_valid, out_found, out_cls_empty;
  logic [CLASS_W-1:0] out_cid;
  logic [ERANK_W-1:0] out_erank;
  logic [EID_W-1:0]   out_eid;
  logic [EID_W:0]     total;

  int checks = 0;
  int failures = 0;

  mpqg #(.CLASS_W(CLASS_W), .ERANK_W(ERANK_W), .EID_W(EID_W), .BITMAP_W(BITMAP_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: per class, elements in arrival order
  typedef struct { int erank; int eid; } el_t;
  el_t ref_l [1 << CLASS_W][$];
  int  free_ids[$];
  int  ref_total = 0;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic issue(eq_op_e o, int cid, int erank, int eid);
    int cyc;
    @(negedge clk);
    while (!op_ready) @(negedge clk);
    op_valid = 1'b1;
    op       = o;
    op_cid   = CLASS_W'(cid);
    op_erank = ERANK_W'(erank);
    op_eid   = EID_W'(eid);
    @(negedge clk);
    op_valid = 1'b0;
    cyc = 1;
    while (!op_ready) begin
      @(negedge clk);
      cyc++;
    end
    check("three cycles per operation", cyc == OP_CYCLES);
  endtask

  task automatic push(int cid, int erank, int eid);
    issue(EQ_PUSH, cid, erank, eid);
    ref_l[cid].push_back('{erank, eid});
    ref_total++;
    check("total after push", total == (EID_W+1)'(ref_total));
  endtask

  // pop and compare; returns the popped Element ID (-1 if none)
  task automatic pop(int cid, output int eid);
    int best;
    logic got;
    best = -1;
    foreach (ref_l[cid][i])
      if (best < 0 || ref_l[cid][i].erank < ref_l[cid][best].erank) best = i;
    fork
      issue(EQ_POP, cid, 0, 0);
      begin
        got = 1'b0;
        while (!got) begin
          @(posedge clk);
          #1;
          got = out_valid;
        end
      end
    join
    check("pop found", out_found == (best >= 0));
    eid = -1;
    if (best >= 0) begin
      check("pop eid", out_eid == EID_W'(ref_l[cid][best].eid));
      check("pop erank", out_erank == ERANK_W'(ref_l[cid][best].erank));
      check("pop class", out_cid == CLASS_W'(cid));
      eid = ref_l[cid][best].eid;
      ref_l[cid].delete(best);
      ref_total--;
      check("class emptied flag", out_cls_empty == (ref_l[cid].size() == 0));
    end
    check("total after pop", total == (EID_W+1)'(ref_total));
  endtask

  task automatic check_counts();
    for (int c = 0; c < (1 << CLASS_W); c++) begin
      cls_cid = CLASS_W'(c);
      #1;
      check("class count", cls_count == (EID_W+1)'(ref_l[c].size()));
    end
  endtask

  int e, init_cycles;

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    init_cycles = 0;
    while (!init_done) begin
      @(negedge clk);
      init_cycles++;
    end
    check("init sweep length", init_cycles == (1 << (CLASS_W + ERANK_W)));
    for (int i = 0; i < NEL; i++) free_ids.push_back(i);

    // directed: class B holds b0:2 b1:4 b2:6 pushed out of order, class A a0:5
    push(1, 6, 12);   // b2
    push(1, 2, 10);   // b0
    push(0, 5, 0);    // a0
    push(1, 4, 11);   // b1
    push(1, 2, 13);   // same bucket as b0: must come after it
    free_ids = free_ids.find(x) with (!(x inside {0, 10, 11, 12, 13}));
    check_counts();
    pop(1, e); check("b0 first", e == 10);
    pop(1, e); check("same-bucket FIFO", e == 13);
    pop(1, e); check("b1 next", e == 11);
    pop(1, e); check("b2 last", e == 12);
    pop(1, e); check("empty class pop", e == -1);
    pop(0, e); free_ids.push_back(0);
    free_ids.push_back(10); free_ids.push_back(11);
    free_ids.push_back(12); free_ids.push_back(13);

    // random traffic, biased so the store fills up and drains again
    for (int n = 0; n < 4000; n++) begin
      int fill_bias;
      fill_bias = ((n / 500) % 2 == 0) ? 70 : 30;
      if (free_ids.size() > 0 && int'($urandom % 100) < fill_bias) begin
        int k, id;
        k  = int'($urandom % free_ids.size());
        id = free_ids[k];
        free_ids.delete(k);
        push(int'($urandom % 4), int'($urandom % (1 << ERANK_W)), id);
      end else begin
        pop(int'($urandom % 4), e);
        if (e >= 0) free_ids.push_back(e);
      end
      if (n % 500 == 0) check_counts();
    end
    for (int c = 0; c < 4; c++)
      while (ref_l[c].size() > 0) begin
        pop(c, e);
      end
    check("drained", total == '0);
    check_counts();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
