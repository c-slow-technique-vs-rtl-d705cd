// core_harness: drives one cslow_core with random programs and checks it
// against the instruction-level model of tb_isa_pkg.
//
// Memory is a behavioural array per thread (thread t sees its own 256
// words) with the one-cycle read latency the core expects. Each round:
// reset, load a random program per thread, run with random stall cycles
// (en low about one cycle in eight) until every thread has halted, then
// compare per thread: micro-steps taken (from the trace port), the enabled
// clock at which halted rose (must be C*(N-1) + ((t+1) mod C)), the final
// accumulator and every memory word. Also checks that the trace port shows
// the threads in strict round-robin order.
module core_harness
  import tb_isa_pkg::*;
#(
  parameter int C      = 3,
  parameter int ROUNDS = 10
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int TW = (C > 1) ? $clog2(C) : 1;

  logic          rst_n = 0, en = 0;
  logic          mem_en, mem_we;
  logic [TW-1:0] mem_tid;
  logic [7:0]    mem_vaddr, mem_wdata, mem_rdata;
  logic [C-1:0]  halted;
  logic [TW-1:0] trace_tid;
  logic [5:0]    trace_upc;
  logic [7:0]    trace_a;

  cslow_core #(.C(C), .DW(8)) dut (.*);

  byte unsigned mem [C][256];
  always @(posedge clk) begin
    if (mem_en) begin
      mem_rdata <= mem[mem_tid][mem_vaddr];
      if (mem_we) mem[mem_tid][mem_vaddr] <= mem_wdata;
    end
  end

  isa_prog prog [C];
  int n, steps [C], halt_at [C], last_a [C];

  initial begin
    done = 0; checks = 0; failures = 0;
    for (int r = 0; r < ROUNDS; r++) begin
      rst_n = 0; en = 0;
      for (int t = 0; t < C; t++) begin
        prog[t] = new();
        prog[t].gen($urandom_range(1, 40));
        if (!prog[t].run()) begin failures++; $display("model did not halt"); end
        for (int i = 0; i < 256; i++) mem[t][i] = prog[t].img[i];
        steps[t] = 0; halt_at[t] = -1; last_a[t] = 0;
      end
      repeat (2) @(negedge clk);
      rst_n = 1;
      n = 0;
      while (halted != '1 && n < 20000) begin
        @(negedge clk);
        en = ($urandom_range(0, 7) != 0);
        for (int t = 0; t < C; t++)
          if (halted[t] && halt_at[t] < 0) halt_at[t] = n - 1;
        #1;
        if (en) begin
          checks++;
          if (int'(trace_tid) != (n + C - 1) % C) begin
            failures++; $display("C=%0d cycle %0d: thread %0d out of turn", C, n, trace_tid);
          end
          if (trace_upc != 6'd52) steps[trace_tid]++;
          last_a[trace_tid] = int'(trace_a);
        end
        @(posedge clk);
        if (en) n++;
      end
      @(negedge clk);
      for (int t = 0; t < C; t++)
        if (halted[t] && halt_at[t] < 0) halt_at[t] = n - 1;
      // a few more cycles: halted threads must stay put
      en = 1;
      repeat (3 * C) @(negedge clk);
      for (int t = 0; t < C; t++) begin
        int exp_cyc;
        exp_cyc = C * (prog[t].steps - 1) + ((t + 1) % C);
        checks += 4;
        if (steps[t] != prog[t].steps) begin
          failures++; $display("C=%0d t%0d: %0d micro-steps, model %0d", C, t, steps[t], prog[t].steps);
        end
        if (halt_at[t] != exp_cyc) begin
          failures++; $display("C=%0d t%0d: halted at cycle %0d, expected %0d", C, t, halt_at[t], exp_cyc);
        end
        if (last_a[t] != int'(prog[t].a)) begin
          failures++; $display("C=%0d t%0d: A=%0d, model %0d", C, t, last_a[t], prog[t].a);
        end
        begin
          int bad;
          bad = 0;
          for (int i = 0; i < 256; i++) if (mem[t][i] != prog[t].fin[i]) bad++;
          if (bad != 0) begin failures++; $display("C=%0d t%0d: %0d memory words differ", C, t, bad); end
        end
      end
    end
    done = 1;
  end
endmodule
