// uifo_pkg -- types and constants shared by the UIFO scheduler blocks.
//
// The scheduler works on two kinds of objects. A class carries a Class ID
// and a class rank (c.rank); an element (one packet) carries an Element ID,
// an element rank (e.rank) and the class it belongs to. A smaller rank means
// a higher priority, for classes and for elements alike.
//
// The default widths give the main configuration of the design: 256 classes,
// 256 class ranks, 256 element ranks and a queue capacity of 65536 elements
// (Element ID 16 bits). The width of every bitmap in the MPQG index tree is 4.
// The modules take these as parameters; the package only supplies defaults
// and the operation codes.
package uifo_pkg;

  // Main configuration (class count, class priority count, element priority
  // count, queue capacity).
  localparam int unsigned CLASS_W_DEF = 8;   // 256 classes
  localparam int unsigned CRANK_W_DEF = 8;   // 256 class ranks
  localparam int unsigned ERANK_W_DEF = 8;   // 256 element ranks
  localparam int unsigned EID_W_DEF   = 16;  // 65536 elements
  localparam int unsigned BITMAP_W_DEF = 4;  // bits per bitmap-tree node

  // Every operation of the UG-PQ, the MPQG and the scheduler as a whole takes
  // this many clock cycles; a new one is accepted every OP_CYCLES cycles.
  localparam int unsigned OP_CYCLES = 3;

  // Operation on the class queue (UG-PQ).
  typedef enum logic [1:0] {
    CQ_NOP    = 2'd0,
    CQ_UPDATE = 2'd1,  // insert the class, or move it to its new rank
    CQ_POP    = 2'd2   // remove the head class
  } cq_op_e;

  // Operation on the element store (MPQG).
  typedef enum logic [1:0] {
    EQ_NOP  = 2'd0,
    EQ_PUSH = 2'd1,    // append an element to bucket {class, e.rank}
    EQ_POP  = 2'd2     // remove the best element of one class
  } eq_op_e;

endpackage
