// tb_cslow_core: runs the C-slow core with random programs at C = 3 (the
// 3-slow design) and at C = 5, checking results, micro-step counts, the
// round-robin order and the exact clock at which each thread halts.
module tb_cslow_core;
  logic clk = 0;
  logic done3, done5;
  int   checks3, failures3, checks5, failures5;

  always #5 clk = ~clk;

  core_harness #(.C(3), .ROUNDS(12)) h3 (.clk(clk), .done(done3), .checks(checks3), .failures(failures3));
  core_harness #(.C(5), .ROUNDS(6))  h5 (.clk(clk), .done(done5), .checks(checks5), .failures(failures5));

  initial begin
    @(posedge clk);
    wait (done3 && done5);
    $display("TB_RESULT checks=%0d failures=%0d", checks3 + checks5, failures3 + failures5);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks3 + checks5, failures3 + failures5 + 1);
    $finish;
  end
endmodule
