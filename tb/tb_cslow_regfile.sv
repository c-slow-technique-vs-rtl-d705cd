// tb_cslow_regfile: random writes and reads on a 3-bank, 4-register file
// compared with a plain array model; checks the banks are independent
// (a write by one thread never shows in another) and that reset clears all.
module tb_cslow_regfile;
  localparam int C = 3, NREGS = 4, DW = 8;
  logic clk = 0, rst_n = 0, we = 0;
  logic [1:0] rd_tid = 0, wr_tid = 0, rd_addr = 0, wr_addr = 0;
  logic [DW-1:0] rd_data, wr_data = 0;
  logic [DW-1:0] model [C][NREGS];
  int checks = 0, failures = 0;

  cslow_regfile #(.C(C), .NREGS(NREGS), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    foreach (model[t, r]) model[t][r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < C; t++)
      for (int r = 0; r < NREGS; r++) begin
        rd_tid = 2'(t); rd_addr = 2'(r); #1;
        checks++;
        if (rd_data !== 0) begin failures++; $display("not cleared %0d/%0d", t, r); end
      end
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we = 1'($urandom); wr_tid = 2'($urandom_range(0, C - 1));
      wr_addr = 2'($urandom); wr_data = 8'($urandom);
      rd_tid = 2'($urandom_range(0, C - 1)); rd_addr = 2'($urandom);
      #1;
      checks++;
      if (rd_data !== model[rd_tid][rd_addr]) begin
        failures++;
        $display("read t%0d r%0d: %0d expected %0d", rd_tid, rd_addr, rd_data, model[rd_tid][rd_addr]);
      end
      @(posedge clk);
      if (we) model[wr_tid][wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
