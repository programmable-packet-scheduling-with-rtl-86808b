// ffs_lsb -- find-first-set on one bitmap word of the MPQG index tree.
//
// Returns the index of the lowest set bit of `word` and whether any bit is
// set. Bit i of a bitmap word stands for child i of a tree node; child 0 covers
// the smallest ranks, so the lowest set bit leads to the highest-priority
// non-empty child. Purely combinational. Which end of the word counts as
// "first" is this design's choice (it follows from smaller rank = higher
// priority).
module ffs_lsb #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0]         word,
  output logic                 any,
  output logic [$clog2(W)-1:0] idx
);
  always_comb begin
    any = 1'b0;
    idx = '0;
    for (int i = W - 1; i >= 0; i--) begin
      if (word[i]) begin
        any = 1'b1;
        idx = ($clog2(W))'(i);
      end
    end
  end
endmodule
