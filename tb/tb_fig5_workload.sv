// tb_fig5_workload: the thread-count comparison workload on the 3-slow
// processor at its default parameters.
//
// Each active thread runs the two-instruction program CMA; HALT, which
// takes 14 micro-steps (reset row 1 + CMA 6 + HALT 7). With 1, 2 and 3
// active threads (idle threads run a bare HALT, 8 micro-steps) the test
// measures how many thread-cycles (groups of C = 3 clocks) pass until all
// active threads have halted, and checks that it is 14 in every case: the
// C-slow machine finishes C threads in the time of the longest one. The
// same work on the unmodified machine takes 14 * n of its cycles, which is
// printed alongside for comparison.
module tb_fig5_workload;
  localparam int C = 3, N = 14;
  logic       clk = 0, rst_n = 0, en = 0;
  logic       host_we = 0;
  logic [9:0] host_addr = 0;
  logic [7:0] host_wdata = 0, host_rdata;
  logic       tlb_we = 0;
  logic [1:0] tlb_tid = 0, tlb_page = 0;
  logic [C-1:0] halted;
  logic [1:0] trace_tid;
  logic [5:0] trace_upc;
  logic [7:0] trace_a;
  int checks = 0, failures = 0;

  cslow_processor dut (.*);

  always #5 clk = ~clk;

  task automatic host_write(int addr, logic [7:0] d);
    @(negedge clk); host_we = 1; host_addr = 10'(addr); host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask

  initial begin
    for (int nthr = 1; nthr <= C; nthr++) begin
      int clocks;
      logic [C-1:0] active;
      rst_n = 0; en = 0;
      for (int t = 0; t < C; t++) begin
        if (t < nthr) begin
          host_write(t * 256 + 0, 8'h00);    // CMA
          host_write(t * 256 + 1, 8'h06);    // HALT
        end else begin
          host_write(t * 256 + 0, 8'h06);    // HALT
        end
      end
      active = C'((1 << nthr) - 1);
      @(negedge clk); rst_n = 1; en = 1;
      clocks = 0;
      while ((halted & active) != active && clocks < 1000) begin
        @(posedge clk); clocks++;
        #1;
      end
      // clocks = enabled clocks until the last active thread halted
      checks += 2;
      if ((clocks + C - 1) / C != N) begin
        failures++;
        $display("%0d threads: %0d clocks = %0d thread-cycles, expected %0d", nthr, clocks,
                 (clocks + C - 1) / C, N);
      end
      if (halted[0] && trace_a != 8'hFF && trace_tid == 0) begin
        failures++;
        $display("thread 0 accumulator after CMA is %0h", trace_a);
      end
      $display("%0d thread(s): C-slow %0d thread-cycles (%0d clocks); unmodified machine %0d cycles",
               nthr, (clocks + C - 1) / C, clocks, N * nthr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
