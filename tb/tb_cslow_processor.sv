// tb_cslow_processor: end-to-end test of the 3-slow processor at its
// default parameters (C = 3 threads, 8-bit words, 4 pages of 256 words).
//
// Each round loads three programs through the host port: thread 0 runs a
// count-down loop with backward jumps (round 0) or a random program,
// threads 1 and 2 run random programs. Thread 2 is remapped by the TLB to
// page 3, and page 2 holds a guard pattern that must stay untouched. The
// threads run with random stall cycles; the host port also reads memory
// while they run. At the end every page is read back through the host
// port and compared with the instruction-level model, and the micro-step
// count and halt clock of every thread are checked (C*(N-1) + ((t+1) mod C)
// enabled clocks: the C threads together take C * max(N) clocks).
// Every mechanism is counted and must occur at least once: each of the 11
// instructions, JOZ and JOC both taken and not taken, stalls, TLB remap,
// host reads while running, and rounds in which all threads overlapped.
module tb_cslow_processor;
  import tb_isa_pkg::*;

  localparam int C = 3, ROUNDS = 12;

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

  cslow_processor dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n, steps [C], halt_at [C], last_a [C];
  int page_of [C] = '{0, 1, 3};
  int cov_op [16], joz_t, joz_n, joc_t, joc_n;
  int n_stall = 0, n_remap = 0, n_host_live = 0, n_overlap = 0;
  isa_prog prog [C];
  byte unsigned guard [256];

  task automatic host_write(int addr, byte unsigned d);
    @(negedge clk); host_we = 1; host_addr = 10'(addr); host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask

  task automatic host_read(int addr, output byte unsigned d);
    @(negedge clk); host_addr = 10'(addr);
    @(posedge clk); #1; d = host_rdata;
  endtask

  // count-down loop: A = 5; do { A = A + 0xFF; M[F2] = A } while (A != 0)
  function automatic void loop_prog(isa_prog p);
    byte unsigned code [12] = '{OP_LOAD, 8'hF0, OP_ADD, 8'hF1, OP_STO, 8'hF2,
                                OP_JOZ, 8'd10, OP_JOC, 8'd2, OP_HALT, 8'h00};
    foreach (code[i]) p.img[i] = code[i];
    p.img[8'hF0] = 8'd5; p.img[8'hF1] = 8'hFF;
  endfunction

  initial begin
    foreach (cov_op[i]) cov_op[i] = 0;
    joz_t = 0; joz_n = 0; joc_t = 0; joc_n = 0;
    foreach (guard[i]) guard[i] = 8'($urandom);
    for (int r = 0; r < ROUNDS; r++) begin
      rst_n = 0; en = 0;
      repeat (2) @(negedge clk);
      rst_n = 1;
      // thread 2 -> page 3 (page 2 left as a guard)
      @(negedge clk); tlb_we = 1; tlb_tid = 2; tlb_page = 3;
      @(negedge clk); tlb_we = 0; n_remap++;
      for (int t = 0; t < C; t++) begin
        prog[t] = new();
        if (r == 0 && t == 0) loop_prog(prog[t]);
        else prog[t].gen($urandom_range(2, 40));
        if (!prog[t].run()) begin failures++; $display("model did not halt"); end
        foreach (prog[t].cov.op_count[i]) cov_op[i] += prog[t].cov.op_count[i];
        joz_t += prog[t].cov.joz_taken; joz_n += prog[t].cov.joz_not;
        joc_t += prog[t].cov.joc_taken; joc_n += prog[t].cov.joc_not;
        for (int i = 0; i < 256; i++) host_write(page_of[t] * 256 + i, prog[t].img[i]);
        steps[t] = 0; halt_at[t] = -1; last_a[t] = 0;
      end
      for (int i = 0; i < 256; i++) host_write(2 * 256 + i, guard[i]);
      // reset the core (not the TLB mapping's effect: remap again below)
      rst_n = 0; @(negedge clk); rst_n = 1;
      @(negedge clk); tlb_we = 1; tlb_tid = 2; tlb_page = 3;
      @(negedge clk); tlb_we = 0;
      n = 0;
      while (halted != '1 && n < 20000) begin
        @(negedge clk);
        en = ($urandom_range(0, 7) != 0);
        if (!en) n_stall++;
        host_addr = 10'($urandom);                 // live host reads
        if (en) n_host_live++;
        for (int t = 0; t < C; t++)
          if (halted[t] && halt_at[t] < 0) halt_at[t] = n - 1;
        #1;
        if (en) begin
          checks++;
          if (int'(trace_tid) != (n + C - 1) % C) begin
            failures++; $display("cycle %0d: thread %0d out of turn", n, trace_tid);
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
      if (prog[0].steps > 1 && prog[1].steps > 1 && prog[2].steps > 1) n_overlap++;
      en = 1;
      repeat (3 * C) @(negedge clk);
      en = 0;
      for (int t = 0; t < C; t++) begin
        int exp_cyc, bad;
        byte unsigned d;
        exp_cyc = C * (prog[t].steps - 1) + ((t + 1) % C);
        checks += 4;
        if (steps[t] != prog[t].steps) begin
          failures++; $display("r%0d t%0d: %0d micro-steps, model %0d", r, t, steps[t], prog[t].steps);
        end
        if (halt_at[t] != exp_cyc) begin
          failures++; $display("r%0d t%0d: halted at %0d, expected %0d", r, t, halt_at[t], exp_cyc);
        end
        if (last_a[t] != int'(prog[t].a)) begin
          failures++; $display("r%0d t%0d: A=%0d, model %0d", r, t, last_a[t], prog[t].a);
        end
        bad = 0;
        for (int i = 0; i < 256; i++) begin
          host_read(page_of[t] * 256 + i, d);
          if (d != prog[t].fin[i]) bad++;
        end
        if (bad != 0) begin failures++; $display("r%0d t%0d: %0d words differ", r, t, bad); end
      end
      begin
        int bad;
        byte unsigned d;
        bad = 0;
        for (int i = 0; i < 256; i++) begin
          host_read(2 * 256 + i, d);
          if (d != guard[i]) bad++;
        end
        checks++;
        if (bad != 0) begin failures++; $display("r%0d: guard page changed in %0d words", r, bad); end
      end
      if (r == 0) begin
        byte unsigned d;
        host_read(8'hF2, d);
        checks++;
        if (d != 0) begin failures++; $display("count-down loop left %0d", d); end
      end
    end
    // every mechanism must have happened
    begin
      string nm [16] = '{"CMA","?","INCA","?","DCRA","?","HALT","?",
                         "LOAD","STO","ADD","SUB","JOZ","JOC","AND","?"};
      for (int i = 0; i < 16; i++) if (nm[i] != "?") begin
        checks++;
        $display("mechanism %-5s executed %0d times", nm[i], cov_op[i]);
        if (cov_op[i] == 0) begin failures++; $display("  never happened"); end
      end
      $display("mechanism JOZ taken %0d / not taken %0d, JOC taken %0d / not taken %0d",
               joz_t, joz_n, joc_t, joc_n);
      $display("mechanism stall %0d, TLB remap %0d, host reads while running %0d, rounds with 3 live threads %0d",
               n_stall, n_remap, n_host_live, n_overlap);
      checks += 8;
      if (joz_t == 0) failures++;
      if (joz_n == 0) failures++;
      if (joc_t == 0) failures++;
      if (joc_n == 0) failures++;
      if (n_stall == 0) failures++;
      if (n_remap == 0) failures++;
      if (n_host_live == 0) failures++;
      if (n_overlap == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
