// ugpq -- update-capable priority queue of classes (the class_list).
//
// Holds at most 2**CLASS_W classes, each as {Class ID, c.rank}, sorted so that
// slot 0 is the head: the class with the smallest c.rank. Among classes of
// equal rank the one that entered (or was last moved) first stays ahead, so
// ties are served first-in first-out. Two operations change the queue:
//
//   CQ_UPDATE (cid, rank)  If the class is absent it is inserted behind every
//                          class of rank <= rank. If it is present with the
//                          same rank nothing moves (Hold). If it is present
//                          with another rank it is deleted and reinserted by
//                          the same rule (Update-In).
//   CQ_POP                 The head class is removed (no effect when empty).
//
// Structure: a one-dimensional compare-and-shift array of registers. Every
// slot compares its entry with the request in parallel, then every slot loads
// its left neighbour, its own entry, its right neighbour or the new entry.
// Each operation takes three cycles:
//   cycle 1 (accept): the request is latched and every slot compares its
//                     Class ID and rank with it (match and <= vectors);
//   cycle 2 (locate): the deletion slot and the insertion slot are found from
//                     the two vectors;
//   cycle 3 (shift):  all slots load their new entries at once.
// op_ready is high in the accept cycle only, so a new operation starts every
// third cycle and never sees a half-finished shift: there are no hazards.
// The head (head_valid, head_cid, head_rank) and the class count are
// registered outputs that change at the end of cycle 3. Reset is synchronous
// and active low and empties the queue.
//
// The published design reuses an existing update-capable priority queue of
// this family (a hybrid of systolic units with two shift registers each, three
// cycles per operation, FIFO among equal ranks, position held when the rank
// does not change). Its insides are not described, so this is a plain
// register shift array with the same behaviour and the same three-cycle
// operation; the internal partitioning into systolic units is not modelled.
module ugpq
  import uifo_pkg::*;
#(
  parameter int unsigned CLASS_W = CLASS_W_DEF,  // Class ID width
  parameter int unsigned CRANK_W = CRANK_W_DEF   // c.rank width
) (
  input  logic               clk,
  input  logic               rst_n,
  // request; accepted when op_valid && op_ready
  input  logic               op_valid,
  output logic               op_ready,
  input  cq_op_e             op,
  input  logic [CLASS_W-1:0] op_cid,
  input  logic [CRANK_W-1:0] op_rank,
  // head of the class_list
  output logic               head_valid,
  output logic [CLASS_W-1:0] head_cid,
  output logic [CRANK_W-1:0] head_rank,
  output logic [CLASS_W:0]   count        // number of classes held
);

  localparam int unsigned CAP = 1 << CLASS_W;

  typedef struct packed {
    logic               v;
    logic [CLASS_W-1:0] cid;
    logic [CRANK_W-1:0] rank;
  } entry_t;

  typedef enum logic [1:0] {S_ACCEPT, S_LOCATE, S_SHIFT} state_e;

  state_e             state_q;
  entry_t             ent_q [CAP];
  logic [CAP-1:0]     match_q, le_q;
  cq_op_e             op_q;
  entry_t             new_q;
  logic               found_q, hold_q, del_le_q;
  logic [CLASS_W:0]   del_q, ins_q;

  assign op_ready   = (state_q == S_ACCEPT);
  assign head_valid = ent_q[0].v;
  assign head_cid   = ent_q[0].cid;
  assign head_rank  = ent_q[0].rank;

  // cycle 2: locate the deletion and insertion slots
  logic               found_d, hold_d;
  logic [CLASS_W:0]   del_d, ins_d;
  always_comb begin
    found_d = 1'b0;
    del_d   = '0;
    ins_d   = '0;
    for (int unsigned i = 0; i < CAP; i++) begin
      if (match_q[i] && !found_d) begin
        found_d = 1'b1;
        del_d   = (CLASS_W+1)'(i);
      end
      if (le_q[i]) ins_d = ins_d + 1'b1;
    end
    hold_d = found_d && (ent_q[del_d[CLASS_W-1:0]].rank == new_q.rank);
  end

  // cycle 3: new content of every slot
  function automatic entry_t after_del(input int unsigned i);
    // slot i of the array once the matched entry is removed
    entry_t e;
    if (found_q && i >= del_q) e = (i + 1 < CAP) ? ent_q[i+1] : '0;
    else                       e = (i < CAP) ? ent_q[i] : '0;
    return e;
  endfunction

  entry_t nxt [CAP];
  always_comb begin
    logic [CLASS_W:0] ins;
    ins = (found_q && del_le_q) ? ins_q - 1'b1 : ins_q;
    for (int unsigned i = 0; i < CAP; i++) begin
      nxt[i] = ent_q[i];
      if (op_q == CQ_POP) begin
        nxt[i] = (i + 1 < CAP) ? ent_q[i+1] : '0;
      end else if (op_q == CQ_UPDATE && !hold_q) begin
        if (i < ins)       nxt[i] = after_del(i);
        else if (i == int'(ins)) nxt[i] = new_q;
        else               nxt[i] = after_del(i - 1);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q  <= S_ACCEPT;
      op_q     <= CQ_NOP;
      new_q    <= '0;
      match_q  <= '0;
      le_q     <= '0;
      found_q  <= 1'b0;
      hold_q   <= 1'b0;
      del_le_q <= 1'b0;
      del_q    <= '0;
      ins_q    <= '0;
      count    <= '0;
      for (int unsigned i = 0; i < CAP; i++) ent_q[i] <= '0;
    end else begin
      unique case (state_q)
        S_ACCEPT: begin
          op_q  <= op_valid ? op : CQ_NOP;
          new_q <= '{v: 1'b1, cid: op_cid, rank: op_rank};
          for (int unsigned i = 0; i < CAP; i++) begin
            match_q[i] <= ent_q[i].v && (ent_q[i].cid == op_cid);
            le_q[i]    <= ent_q[i].v && (ent_q[i].rank <= op_rank);
          end
          if (op_valid) state_q <= S_LOCATE;
        end
        S_LOCATE: begin
          found_q  <= found_d;
          hold_q   <= hold_d;
          del_q    <= del_d;
          del_le_q <= le_q[del_d[CLASS_W-1:0]];
          ins_q    <= ins_d;
          state_q  <= S_SHIFT;
        end
        S_SHIFT: begin
          for (int unsigned i = 0; i < CAP; i++) ent_q[i] <= nxt[i];
          if (op_q == CQ_POP && ent_q[0].v) count <= count - 1'b1;
          else if (op_q == CQ_UPDATE && !found_q) count <= count + 1'b1;
          state_q <= S_ACCEPT;
        end
        default: state_q <= S_ACCEPT;
      endcase
    end
  end

  // A new class always has a free slot: Class IDs are unique and there are
  // exactly CAP of them.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_SHIFT && op_q == CQ_UPDATE && !found_q) |-> !ent_q[CAP-1].v)
    else $error("ugpq: insert into a full queue");

endmodule
