// shared_memory: main memory M, shared by all threads and kept outside the
// C-slowed logic.
//
// One array of 2^PAW words of DW bits holds instructions and data of every
// thread (each thread in its own page, chosen by thread_tlb). Port A serves
// the processor, port B a host that loads programs and reads results.
// Both ports are synchronous: an address presented on a clock edge returns
// its word after that edge (one cycle of latency), the "pipelined" memory
// the C-slow scheme asks for so that it fits the interleaved schedule.
// A write returns the old word on the same port (read-before-write). If
// both ports write one address in the same cycle, port A wins.
//
// The registered read and the second port are this design's choices; the
// paper only says the main memory is shared and outside the C-slow part.
// No reset: contents are loaded through port B.
module shared_memory #(
  parameter int DW  = 8,
  parameter int PAW = 10
) (
  input  logic           clk,
  // processor port
  input  logic           a_en,
  input  logic           a_we,
  input  logic [PAW-1:0] a_addr,
  input  logic [DW-1:0]  a_wdata,
  output logic [DW-1:0]  a_rdata,
  // host port
  input  logic           b_we,
  input  logic [PAW-1:0] b_addr,
  input  logic [DW-1:0]  b_wdata,
  output logic [DW-1:0]  b_rdata
);

  logic [DW-1:0] mem [2**PAW];

  always_ff @(posedge clk) begin
    if (b_we && !(a_en && a_we && a_addr == b_addr))
      mem[b_addr] <= b_wdata;
    if (a_en && a_we)
      mem[a_addr] <= a_wdata;
  end

  always_ff @(posedge clk) begin
    if (a_en)
      a_rdata <= mem[a_addr];
    b_rdata <= mem[b_addr];
  end

endmodule
