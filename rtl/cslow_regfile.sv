// cslow_regfile: register file replicated C times, one bank per thread.
//
// In a C-slowed processor every thread must see a register file of its
// own, so the file is made C times larger and the thread number selects the
// bank. With the accumulator ISA the file holds one register (A) per
// thread, NREGS = 1, but any number works.
//
// Interface: combinational read (rd_tid, rd_addr -> rd_data); write on the
// rising clock edge when we is high. Reset (rst_n low) clears every
// register, which is this design's choice (the paper does not describe
// reset). rd_addr/wr_addr are one bit wide when NREGS = 1 and ignored then.
module cslow_regfile #(
  parameter int C     = 3,
  parameter int NREGS = 1,
  parameter int DW    = 8,
  localparam int TW   = (C > 1) ? $clog2(C) : 1,
  localparam int RW   = (NREGS > 1) ? $clog2(NREGS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [TW-1:0] rd_tid,
  input  logic [RW-1:0] rd_addr,
  output logic [DW-1:0] rd_data,
  input  logic          we,
  input  logic [TW-1:0] wr_tid,
  input  logic [RW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data
);

  logic [DW-1:0] regs [C][NREGS];

  function automatic int unsigned ridx(logic [RW-1:0] a);
    return (NREGS > 1) ? int'(a) : 0;
  endfunction

  assign rd_data = regs[rd_tid][ridx(rd_addr)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < C; t++)
        for (int r = 0; r < NREGS; r++)
          regs[t][r] <= '0;
    end else if (we) begin
      regs[wr_tid][ridx(wr_addr)] <= wr_data;
    end
  end

  // Thread numbers must stay below C.
  assert property (@(posedge clk) disable iff (!rst_n) we |-> (int'(wr_tid) < C));

endmodule
