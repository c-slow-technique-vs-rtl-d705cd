// tb_thread_tlb: checks the reset mapping (thread t -> page t), then random
// remaps against a model, including two threads sharing one page.
module tb_thread_tlb;
  localparam int C = 3, PGW = 2;
  logic clk = 0, rst_n = 0, we = 0;
  logic [1:0] tid = 0, wr_tid = 0;
  logic [PGW-1:0] page, wr_page = 0;
  int model [C];
  int checks = 0, failures = 0;

  thread_tlb #(.C(C), .PGW(PGW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < C; t++) begin
      model[t] = t;
      tid = 2'(t); #1;
      checks++;
      if (int'(page) != t) begin failures++; $display("reset map t%0d -> %0d", t, page); end
    end
    // share: thread 2 onto thread 0's page
    @(negedge clk); we = 1; wr_tid = 2; wr_page = 0;
    @(posedge clk); model[2] = 0;
    @(negedge clk); we = 0; tid = 2; #1;
    checks++;
    if (page !== 0) begin failures++; $display("share failed"); end
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      we = 1'($urandom); wr_tid = 2'($urandom_range(0, C - 1)); wr_page = PGW'($urandom);
      tid = 2'($urandom_range(0, C - 1));
      #1;
      checks++;
      if (int'(page) != model[tid]) begin
        failures++; $display("t%0d -> %0d expected %0d", tid, page, model[tid]);
      end
      @(posedge clk);
      if (we) model[wr_tid] = int'(wr_page);
    end
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
