// tb_shared_memory: random traffic on both ports against an array model.
// Checks the one-cycle read latency, read-before-write on a port, writes
// from either port seen by the other, port A winning a same-address write,
// and that port A's read register holds while a_en is low.
module tb_shared_memory;
  localparam int DW = 8, PAW = 6;
  logic clk = 0;
  logic a_en = 0, a_we = 0, b_we = 0;
  logic [PAW-1:0] a_addr = 0, b_addr = 0;
  logic [DW-1:0] a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  logic [DW-1:0] model [2**PAW];
  logic [DW-1:0] exp_a, exp_b;
  bit   chk_a = 0;
  int checks = 0, failures = 0;

  shared_memory #(.DW(DW), .PAW(PAW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    // fill through port B
    for (int i = 0; i < 2**PAW; i++) begin
      @(negedge clk); b_we = 1; b_addr = PAW'(i); b_wdata = 8'($urandom); model[i] = b_wdata;
    end
    @(negedge clk); b_we = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      a_en = ($urandom_range(0, 5) != 0); a_we = 1'($urandom); b_we = 1'($urandom);
      a_addr = PAW'($urandom); b_addr = ($urandom_range(0, 3) == 0) ? a_addr : PAW'($urandom);
      a_wdata = 8'($urandom); b_wdata = 8'($urandom);
      if (a_en) exp_a = model[a_addr];
      exp_b = model[b_addr];
      @(posedge clk);
      if (b_we && !(a_en && a_we && a_addr == b_addr)) model[b_addr] = b_wdata;
      if (a_en && a_we) model[a_addr] = a_wdata;
      #1;
      checks += 2;
      if (a_rdata !== exp_a) begin failures++; $display("A read %0d: %0h expected %0h", i, a_rdata, exp_a); end
      if (b_rdata !== exp_b) begin failures++; $display("B read %0d: %0h expected %0h", i, b_rdata, exp_b); end
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
