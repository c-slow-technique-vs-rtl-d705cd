// cslow_processor: top level of the C-slow (default 3-slow) processor.
//
// C threads run on one microprogrammed accumulator datapath (cslow_core),
// interleaved clock by clock. Each thread has an 8-bit virtual address
// space that thread_tlb maps onto a page of the shared main memory, so
// every thread behaves as if it owned a private processor and memory.
// Memory is one array of 2^(DW+PGW) words outside the C-slowed logic.
//
// Ports: clk, rst_n (active low, asynchronous), en (0 freezes all threads).
// host_* reads and writes the memory by physical address
// ({page, virtual address}) with one clock of read latency, usable while
// the threads run. tlb_* remaps a thread to another page. halted[t] is set
// once thread t reaches its HALT instruction. trace_* shows the micro-step
// finished each clock (thread, micro-address, accumulator after the step).
//
// After reset thread t starts at virtual address 0 of page t. The host
// ports and the page-per-thread mapping are this design's own; the paper
// gives the core, the C-times TLB idea and the shared memory.
module cslow_processor
  import cslow_pkg::*;
#(
  parameter int C    = 3,
  parameter int DW   = 8,
  parameter int PGW  = 2,
  localparam int TW  = (C > 1) ? $clog2(C) : 1,
  localparam int PAW = DW + PGW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic           host_we,
  input  logic [PAW-1:0] host_addr,
  input  logic [DW-1:0]  host_wdata,
  output logic [DW-1:0]  host_rdata,
  input  logic           tlb_we,
  input  logic [TW-1:0]  tlb_tid,
  input  logic [PGW-1:0] tlb_page,
  output logic [C-1:0]   halted,
  output logic [TW-1:0]  trace_tid,
  output logic [UAW-1:0] trace_upc,
  output logic [DW-1:0]  trace_a
);

  logic           mem_en, mem_we;
  logic [TW-1:0]  mem_tid;
  logic [DW-1:0]  mem_vaddr, mem_wdata, mem_rdata;
  logic [PGW-1:0] mem_page;

  cslow_core #(.C(C), .DW(DW)) u_core (
    .clk         (clk),
    .rst_n       (rst_n),
    .en          (en),
    .mem_en      (mem_en),
    .mem_tid     (mem_tid),
    .mem_vaddr   (mem_vaddr),
    .mem_we      (mem_we),
    .mem_wdata   (mem_wdata),
    .mem_rdata   (mem_rdata),
    .halted      (halted),
    .trace_tid   (trace_tid),
    .trace_upc   (trace_upc),
    .trace_a     (trace_a)
  );

  thread_tlb #(.C(C), .PGW(PGW)) u_tlb (
    .clk     (clk),
    .rst_n   (rst_n),
    .tid     (mem_tid),
    .page    (mem_page),
    .we      (tlb_we),
    .wr_tid  (tlb_tid),
    .wr_page (tlb_page)
  );

  shared_memory #(.DW(DW), .PAW(PAW)) u_mem (
    .clk     (clk),
    .a_en    (mem_en),
    .a_we    (mem_we),
    .a_addr  ({mem_page, mem_vaddr}),
    .a_wdata (mem_wdata),
    .a_rdata (mem_rdata),
    .b_we    (host_we),
    .b_addr  (host_addr),
    .b_wdata (host_wdata),
    .b_rdata (host_rdata)
  );

endmodule
