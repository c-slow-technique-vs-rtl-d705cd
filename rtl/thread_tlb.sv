// thread_tlb: per-thread address translation for the C-slow processor.
//
// To keep the threads from seeing each other's memory, each thread owns one
// translation entry: the physical page its whole virtual address space maps
// to. The physical address is {page[tid], virtual address}. The table is C
// entries, one per thread, which is the "TLB made C times larger" of the
// C-slow scheme in its simplest form; a page-per-thread entry (rather than a
// multi-entry TLB per thread) is this design's own choice.
//
// Interface: combinational lookup tid -> page; a host write port
// (we, wr_tid, wr_page) remaps a thread on the clock edge. Reset maps
// thread t to page t (mod 2^PGW).
module thread_tlb #(
  parameter int C   = 3,
  parameter int PGW = 2,
  localparam int TW = (C > 1) ? $clog2(C) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [TW-1:0]  tid,
  output logic [PGW-1:0] page,
  input  logic           we,
  input  logic [TW-1:0]  wr_tid,
  input  logic [PGW-1:0] wr_page
);

  logic [PGW-1:0] entry [C];

  assign page = entry[tid];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < C; t++)
        entry[t] <= PGW'(t);
    end else if (we) begin
      entry[wr_tid] <= wr_page;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) we |-> (int'(wr_tid) < C));

endmodule
