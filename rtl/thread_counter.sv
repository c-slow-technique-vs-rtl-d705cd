// thread_counter: round-robin hardware thread counter of the C-slow core.
//
// Counts 0, 1, ..., C-1, 0, ... advancing once per enabled clock, so that
// the C threads take turns on the single datapath in a fixed order. The
// count names the thread whose micro-step is in the memory / register-read
// stage; the core uses it to select that thread's register bank and TLB
// entry. Reset value 0 is this design's choice.
module thread_counter #(
  parameter int C   = 3,
  localparam int TW = (C > 1) ? $clog2(C) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  output logic [TW-1:0] tid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      tid <= '0;
    else if (en)
      tid <= (int'(tid) == C - 1) ? '0 : tid + TW'(1);
  end

endmodule
