// tb_thread_counter: checks the round-robin sequence 0,1,2,0,... for C = 3
// and C = 5, that it holds while en is low, and that reset returns it to 0.
module tb_thread_counter;
  logic clk = 0, rst_n = 0, en = 0;
  logic [1:0] tid3;
  logic [2:0] tid5;
  int checks = 0, failures = 0;
  int exp3 = 0, exp5 = 0;

  thread_counter #(.C(3)) dut3 (.clk(clk), .rst_n(rst_n), .en(en), .tid(tid3));
  thread_counter #(.C(5)) dut5 (.clk(clk), .rst_n(rst_n), .en(en), .tid(tid5));

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      checks++;
      if (int'(tid3) != exp3 || int'(tid5) != exp5) begin
        failures++;
        $display("cycle %0d: %0d/%0d expected %0d/%0d", i, tid3, tid5, exp3, exp5);
      end
      en = (i % 7 != 3);
      @(posedge clk);
      if (en) begin exp3 = (exp3 + 1) % 3; exp5 = (exp5 + 1) % 5; end
    end
    rst_n = 0; #1;
    checks++;
    if (tid3 !== 0 || tid5 !== 0) begin failures++; $display("reset failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
