// tb_uifo_configs -- the scheduler in the two other sized configurations of
// the ASIC evaluation, run side by side:
//   small: 64 classes, 64 class ranks, 4096 elements, 64 element ranks
//          (CLASS_W 6, CRANK_W 6, ERANK_W 6, EID_W 12; 6-level tree);
//   wide:  4096 classes, 4096 class ranks, 65536 elements, 16 element ranks
//          (CLASS_W 12, CRANK_W 12, ERANK_W 4, EID_W 16; 4096-slot class
//          queue, 8-level tree whose upper six levels select the class).
// Each instance runs the directed examples and random traffic against the
// reference model (see uifo_runner). The default configuration is covered by
// tb_uifo_full.
module tb_uifo_configs;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic done_s, done_w;
  int   checks_s, failures_s, checks_w, failures_w;

  always #5 clk = ~clk;

  uifo_runner #(.CLASS_W(6), .CRANK_W(6), .ERANK_W(6), .EID_W(12), .N_OPS(4000))
    u_small (.clk, .rst_n, .done(done_s), .checks(checks_s), .failures(failures_s));

  uifo_runner #(.CLASS_W(12), .CRANK_W(12), .ERANK_W(4), .EID_W(16), .N_OPS(4000))
    u_wide (.clk, .rst_n, .done(done_w), .checks(checks_w), .failures(failures_w));

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks_s + checks_w, failures_s + failures_w + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    wait (done_s && done_w);
    $display("small: checks=%0d failures=%0d  wide: checks=%0d failures=%0d",
             checks_s, failures_s, checks_w, failures_w);
    $display("TB_RESULT checks=%0d failures=%0d", checks_s + checks_w, failures_s + failures_w);
    $finish;
  end
endmodule
