// uifo_ref_pkg -- reference model of the UIFO scheduling semantics, used by
// the scheduler testbenches.
//
// The model keeps the class_list as an ordered queue of {class, c.rank} and,
// per class, the element_list in arrival order. It implements the rules
// directly, with no knowledge of the hardware:
//   enqueue: a new class goes behind every class of rank <= c.rank; a class
//            whose rank changes is taken out and reinserted by the same rule;
//            a class whose rank is unchanged stays where it is. The element
//            (if any) is appended to its class.
//   dequeue: the head class is served; its element with the smallest e.rank
//            (the oldest among equals) is returned; a class left without
//            elements is removed. An empty head class is removed and nothing
//            is returned.
// It also counts which of these cases occurred, so a testbench can show that
// each mechanism was exercised.
package uifo_ref_pkg;

  typedef struct { int cid; int rank; } cls_t;
  typedef struct { int erank; int eid; } el_t;

  typedef struct {
    bit found;
    int cid;
    int erank;
    int eid;
  } deq_t;

  class uifo_ref;
    cls_t cl[$];
    el_t  el[int][$];
    int   n_elems;
    // mechanism counters
    int   n_new_class, n_update_in, n_hold, n_push_in, n_rank_only;
    int   n_first_out, n_class_pop, n_empty_head, n_empty_sched, n_reorder;

    function new();
      n_elems = 0;
      n_new_class = 0; n_update_in = 0; n_hold = 0; n_push_in = 0;
      n_rank_only = 0; n_first_out = 0; n_class_pop = 0; n_empty_head = 0;
      n_empty_sched = 0; n_reorder = 0;
    endfunction

    function int class_index(int cid);
      foreach (cl[i]) if (cl[i].cid == cid) return i;
      return -1;
    endfunction

    function void enqueue(int cid, int crank, bit push, int erank, int eid);
      int idx, pos;
      idx = class_index(cid);
      if (idx >= 0 && cl[idx].rank == crank) begin
        n_hold++;
      end else begin
        if (idx >= 0) begin
          // a move that changes the position relative to a class that
          // holds buffered elements reorders those elements
          cl.delete(idx);
          n_update_in++;
        end else begin
          n_new_class++;
        end
        pos = 0;
        foreach (cl[i]) if (cl[i].rank <= crank) pos = i + 1;
        cl.insert(pos, '{cid, crank});
        if (idx >= 0 && pos != idx && el.exists(cid) && el[cid].size() > 0) n_reorder++;
      end
      if (push) begin
        el[cid].push_back('{erank, eid});
        n_elems++;
        n_push_in++;
      end else begin
        n_rank_only++;
      end
    endfunction

    function deq_t dequeue();
      deq_t r;
      int c, best;
      r.found = 1'b0; r.cid = 0; r.erank = 0; r.eid = 0;
      if (cl.size() == 0) begin
        n_empty_sched++;
        return r;
      end
      c = cl[0].cid;
      if (!el.exists(c) || el[c].size() == 0) begin
        void'(cl.pop_front());
        n_empty_head++;
        return r;
      end
      best = 0;
      foreach (el[c][i]) if (el[c][i].erank < el[c][best].erank) best = i;
      r.found = 1'b1;
      r.cid   = c;
      r.erank = el[c][best].erank;
      r.eid   = el[c][best].eid;
      el[c].delete(best);
      n_elems--;
      n_first_out++;
      if (el[c].size() == 0) begin
        void'(cl.pop_front());
        n_class_pop++;
      end
      return r;
    endfunction
  endclass

endpackage
