// mpqg -- multi-priority-queue group: one element_list per class, kept in a
// bitmap tree over {Class ID, e.rank} with a shared singly linked list.
//
// What it does. The MPQG holds up to 2**EID_W elements. An element is filed
// under the priority bucket (PB) {Class ID, e.rank}; the group therefore holds
// M x R first-in first-out buckets (M classes, R element ranks). Two
// operations:
//   EQ_PUSH (cid, erank, eid)  append the element to bucket {cid, erank}
//                              (Push-In);
//   EQ_POP  (cid)              remove and return the oldest element of the
//                              lowest non-empty bucket of class cid, i.e. the
//                              highest-priority element of that class
//                              (First-Out). On an empty class nothing changes
//                              and out_found is 0.
//
// How it works. The 2*log2(...) bit key {cid, erank} is cut into groups of
// log2(BITMAP_W) bits, one group per tree level, most significant first, so
// the upper CLASS_W/log2(BITMAP_W) levels select the class and the lower ones
// the e.rank. Every level has a Bitmap RAM, one BITMAP_W-bit word per node
// (bit i set when child i holds elements), and a Counter RAM, one counter per
// child (the number of elements below it). At the leaf level the counter is
// the bucket's length; beside it a Head/Tail RAM holds the bucket's first and
// last Element ID. All buckets share one Next RAM indexed by Element ID, so
// the buckets are singly linked lists through a common store and any bucket
// can grow up to the full capacity. A pop walks the tree from the root: in the
// class levels it follows the Class ID, in the rank levels it takes the lowest
// set bit of the node's bitmap (hierarchical find-first-set). The counter of
// the last class level is the class's element count; `cls_count` reads it for
// any Class ID, which the scheduler uses to see that a pop will empty the
// class.
//
// Timing. Every operation takes three cycles, the same as the class queue:
//   cycle 1 (accept): request latched; for a pop the key is found by the
//                     find-first-set walk over the Bitmap RAMs;
//   cycle 2 (read):   counters and bitmap words on the key's path, the
//                     bucket's head and tail and the head's Next entry are
//                     read;
//   cycle 3 (write):  all of them are written back (counters +1/-1, bitmap
//                     bits set or cleared where a counter leaves or reaches
//                     0, list pointers) and a pop result is registered;
//                     out_valid is high in the following cycle.
// op_ready is high only in the accept cycle, so one operation starts every
// third cycle and each one sees the finished writes of the one before.
// After reset an initialisation sweep clears one address of every Counter and
// Bitmap RAM per cycle (2**(CLASS_W+ERANK_W) cycles); op_ready stays low
// until it ends. Head, tail and Next entries need no clearing: they are read
// only where a counter says they were written. Reset is synchronous and
// active low.
//
// The tree, the per-level Bitmap and Counter RAMs, the leaf
// Counter/Head/Tail RAM, the shared singly linked list, the bitmap width of 4
// and the three-cycle operation follow the published design. The placement of
// reads and writes in the three cycles, the initialisation sweep, the
// counter-per-child layout and the lowest-bit-first convention are this
// design's choices. The RAMs are plain arrays with combinational read.
module mpqg
  import uifo_pkg::*;
#(
  parameter int unsigned CLASS_W  = CLASS_W_DEF,   // Class ID width (M = 2**CLASS_W)
  parameter int unsigned ERANK_W  = ERANK_W_DEF,   // e.rank width (R = 2**ERANK_W)
  parameter int unsigned EID_W    = EID_W_DEF,     // Element ID width (N = 2**EID_W)
  parameter int unsigned BITMAP_W = BITMAP_W_DEF   // bits per tree node
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic               init_done,
  // request; accepted when op_valid && op_ready
  input  logic               op_valid,
  output logic               op_ready,
  input  eq_op_e             op,
  input  logic [CLASS_W-1:0] op_cid,
  input  logic [ERANK_W-1:0] op_erank,   // PUSH only
  input  logic [EID_W-1:0]   op_eid,     // PUSH only
  // element count of one class (combinational read of the class-level counter)
  input  logic [CLASS_W-1:0] cls_cid,
  output logic [EID_W:0]     cls_count,
  // pop result, one cycle, three cycles after the accept
  output logic               out_valid,
  output logic               out_found,
  output logic [CLASS_W-1:0] out_cid,
  output logic [ERANK_W-1:0] out_erank,
  output logic [EID_W-1:0]   out_eid,
  output logic               out_cls_empty,  // the pop emptied the class
  output logic [EID_W:0]     total           // elements held
);

  localparam int unsigned SB     = $clog2(BITMAP_W);  // key bits per level
  localparam int unsigned KW     = CLASS_W + ERANK_W; // key width
  localparam int unsigned LEVELS = KW / SB;
  localparam int unsigned CL     = CLASS_W / SB;      // class levels
  localparam int unsigned CNT_W  = EID_W + 1;
  localparam int unsigned NPB    = 1 << KW;           // priority buckets
  localparam int unsigned NEL    = 1 << EID_W;        // elements

  typedef enum logic [1:0] {S_INIT, S_ACCEPT, S_READ, S_WRITE} state_e;

  state_e             state_q;
  logic [KW-1:0]      init_idx_q;
  eq_op_e             op_q;
  logic [KW-1:0]      key_q;
  logic [EID_W-1:0]   eid_q;
  logic               found_q;

  // leaf Head/Tail RAM and shared Next RAM
  logic [EID_W-1:0]   head_mem [NPB];
  logic [EID_W-1:0]   tail_mem [NPB];
  logic [EID_W-1:0]   next_mem [NEL];
  logic [EID_W-1:0]   head_rd_q, tail_rd_q, next_rd_q;

  logic [KW-1:0]      pop_key;      // result of the find-first-set walk
  logic               cls_nonempty; // class of the request holds elements

  assign op_ready  = (state_q == S_ACCEPT);
  assign init_done = (state_q != S_INIT);

  // ---------------------------------------------------------------- levels
  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    localparam int unsigned NODES = 1 << (SB * l);
    localparam int unsigned KIDS  = NODES * BITMAP_W;
    localparam int unsigned NW    = (SB * l > 0) ? SB * l : 1;
    localparam int unsigned CW    = SB * (l + 1);

    logic [BITMAP_W-1:0] bmp [NODES];   // Bitmap RAM
    logic [CNT_W-1:0]    cnt [KIDS];    // Counter RAM
    logic [BITMAP_W-1:0] bmp_rd_q;
    logic [CNT_W-1:0]    cnt_rd_q;

    // find-first-set walk (cycle 1)
    logic [KW-1:0]  pfx_i, pfx_o;
    logic [SB-1:0]  walk_slot;
    if (l == 0) begin : g_root
      assign pfx_i = '0;
    end else begin : g_inner
      assign pfx_i = g_lvl[l-1].pfx_o;
    end
    if (l < CL) begin : g_cls
      assign walk_slot = op_cid[CLASS_W - 1 - SB * l -: SB];
    end else begin : g_rank
      logic [NW-1:0] walk_node;
      logic          ffs_any;
      assign walk_node = NW'(pfx_i >> (KW - SB * l));
      ffs_lsb #(.W(BITMAP_W)) u_ffs (.word(bmp[walk_node]), .any(ffs_any), .idx(walk_slot));
      // Tree consistency: below a class that holds elements, every node on
      // the walk has a set bit. (An all-zero word occurs only for an empty
      // class, whose pop changes nothing.)
      a_walk: assert property (@(posedge clk) disable iff (!rst_n)
        (state_q == S_ACCEPT && op_valid && op == EQ_POP && cls_nonempty) |-> ffs_any)
        else $error("mpqg: bitmap tree inconsistent with class counter");
    end
    assign pfx_o = pfx_i | (KW'(walk_slot) << (KW - CW));

    // path of the latched key (cycles 2 and 3)
    logic [NW-1:0]  node_w;
    logic [CW-1:0]  kid_w;
    logic [SB-1:0]  slot_w;
    assign node_w = NW'(key_q >> (KW - SB * l));
    assign kid_w  = key_q[KW-1 -: CW];
    assign slot_w = kid_w[SB-1:0];

    always_ff @(posedge clk) begin
      case (state_q)
        S_INIT: begin
          if (32'(init_idx_q) < KIDS)  cnt[CW'(init_idx_q)] <= '0;
          if (32'(init_idx_q) < NODES) bmp[NW'(init_idx_q)] <= '0;
        end
        S_READ: begin
          cnt_rd_q <= cnt[kid_w];
          bmp_rd_q <= bmp[node_w];
        end
        S_WRITE: begin
          if (op_q == EQ_PUSH) begin
            cnt[kid_w]  <= cnt_rd_q + 1'b1;
            bmp[node_w] <= bmp_rd_q | (BITMAP_W'(1) << slot_w);
          end else if (op_q == EQ_POP && found_q) begin
            cnt[kid_w]  <= cnt_rd_q - 1'b1;
            if (cnt_rd_q == CNT_W'(1))
              bmp[node_w] <= bmp_rd_q & ~(BITMAP_W'(1) << slot_w);
          end
        end
        default: ;
      endcase
    end
  end

  assign pop_key      = g_lvl[LEVELS-1].pfx_o;
  assign cls_nonempty = (g_lvl[CL-1].cnt[op_cid] != '0);
  assign cls_count    = g_lvl[CL-1].cnt[cls_cid];

  // ------------------------------------------------------------ control
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q       <= S_INIT;
      init_idx_q    <= '0;
      op_q          <= EQ_NOP;
      key_q         <= '0;
      eid_q         <= '0;
      found_q       <= 1'b0;
      out_valid     <= 1'b0;
      out_found     <= 1'b0;
      out_cid       <= '0;
      out_erank     <= '0;
      out_eid       <= '0;
      out_cls_empty <= 1'b0;
      total         <= '0;
      head_rd_q     <= '0;
      tail_rd_q     <= '0;
      next_rd_q     <= '0;
    end else begin
      out_valid <= 1'b0;
      case (state_q)
        S_INIT: begin
          init_idx_q <= init_idx_q + 1'b1;
          if (init_idx_q == '1) state_q <= S_ACCEPT;
        end
        S_ACCEPT: begin
          if (op_valid) begin
            op_q    <= op;
            eid_q   <= op_eid;
            key_q   <= (op == EQ_POP) ? pop_key : {op_cid, op_erank};
            found_q <= (op == EQ_PUSH) || (op == EQ_POP && cls_nonempty);
            state_q <= S_READ;
          end
        end
        S_READ: begin
          head_rd_q <= head_mem[key_q];
          tail_rd_q <= tail_mem[key_q];
          next_rd_q <= next_mem[head_mem[key_q]];
          state_q   <= S_WRITE;
        end
        S_WRITE: begin
          if (op_q == EQ_PUSH) begin
            total <= total + 1'b1;
          end else if (op_q == EQ_POP) begin
            out_valid     <= 1'b1;
            out_found     <= found_q;
            out_cid       <= key_q[KW-1 -: CLASS_W];
            out_erank     <= key_q[ERANK_W-1:0];
            out_eid       <= head_rd_q;
            out_cls_empty <= found_q && (g_lvl[CL-1].cnt_rd_q == CNT_W'(1));
            if (found_q) total <= total - 1'b1;
          end
          state_q <= S_ACCEPT;
        end
        default: state_q <= S_INIT;
      endcase
    end
  end

  // leaf list RAMs: written in cycle 3
  always_ff @(posedge clk) begin
    if (rst_n && state_q == S_WRITE) begin
      if (op_q == EQ_PUSH) begin
        // empty bucket: the element becomes head and tail; otherwise it is
        // linked behind the old tail
        if (g_lvl[LEVELS-1].cnt_rd_q == '0) head_mem[key_q] <= eid_q;
        else                                next_mem[tail_rd_q] <= eid_q;
        tail_mem[key_q] <= eid_q;
      end else if (op_q == EQ_POP && found_q) begin
        head_mem[key_q] <= next_rd_q;
      end
    end
  end

  // Element IDs are unique, so the store can never hold more than NEL.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_WRITE && op_q == EQ_PUSH) |-> (total < (EID_W+1)'(NEL)))
    else $error("mpqg: push into a full store");

endmodule
