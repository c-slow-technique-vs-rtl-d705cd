// cslow_core: a C-slowed microprogrammed accumulator processor.
//
// The unmodified processor is a microprogrammed state machine: each clock
// it executes one micro-instruction (one row of the 53-row microprogram)
// for its single program. C-slowing replaces every register of that
// machine by C registers, so C independent threads circulate through the
// same logic, one step of each thread every C clocks, and retiming then
// moves those extra registers into the logic to shorten the clock period.
//
// Here the C registers of the loop are placed as three stages plus a
// delay chain:
//
//   stage U  (micro-fetch)  control-store read for the thread's uPC
//            ---- register r1: state + micro-instruction ----
//   stage M  (memory)       thread counter selects the register bank and
//                           TLB entry; memory read or write at MAR;
//                           the accumulator A is read from the bank
//            ---- register r2 + the memory's read register ----
//   stage X  (execute)      decode IR, ALU, next uPC, write back A
//            ---- C-2 registers of per-thread state (chain) ----
//   back to stage U
//
// Any moment the loop holds C different threads, one per register layer,
// so a thread's consecutive micro-steps are exactly C clocks apart and no
// thread ever sees another's half-finished step: no interlocks or bypasses
// are needed. The state registers (uPC, pc, MAR, IR, Buffer, z, c) travel
// round the loop; the accumulator stays in a C-banked register file
// indexed by thread number, as the C-slow scheme prescribes for register
// files. C must be at least 3 (one register per stage boundary).
//
// Timing: thread t (0..C-1) executes its k-th micro-step (k = 1, 2, ...)
// in stage X in enabled cycle C*(k-1) + ((t+1) mod C), counting the first
// enabled cycle after reset as 0. A program that needs N micro-steps to
// reach the HALT row therefore finishes after C*N clocks, and C programs
// together take C * max(N) clocks, against sum(N) clocks on the
// unmodified machine at its (slower) clock.
//
// Interface: en = 0 freezes every thread (registers, memory read register
// and thread counter). The memory port carries the thread number and the
// virtual address; the caller translates and returns the read word one
// clock later. halted[t] rises once thread t has reached the HALT row.
// trace_* reports the micro-step completed in stage X in each cycle where
// en is high.
//
// What follows the paper: the microprogram, replicated state registers,
// the C-times register file selected by a thread counter, shared memory
// outside the loop, round-robin order. This design's own choices: the
// placement of the retimed registers, the reset values, the stall input,
// the 8-bit default word.
module cslow_core
  import cslow_pkg::*;
#(
  parameter int C   = 3,
  parameter int DW  = 8,
  localparam int TW = (C > 1) ? $clog2(C) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  // memory request, stage M
  output logic           mem_en,
  output logic [TW-1:0]  mem_tid,
  output logic [DW-1:0]  mem_vaddr,
  output logic           mem_we,
  output logic [DW-1:0]  mem_wdata,
  // memory read word, one clock after the request
  input  logic [DW-1:0]  mem_rdata,
  // status
  output logic [C-1:0]   halted,
  output logic [TW-1:0]  trace_tid,
  output logic [UAW-1:0] trace_upc,
  output logic [DW-1:0]  trace_a
);

  if (C < 3) begin : g_c_check
    $error("cslow_core needs C >= 3: one register per stage boundary");
  end

  typedef struct packed {
    logic [UAW-1:0] upc;
    logic [DW-1:0]  pc;
    logic [DW-1:0]  mar;
    logic [DW-1:0]  ir;
    logic [DW-1:0]  buffer;
    logic           z;
    logic           c;
  } state_t;

  typedef struct packed {
    state_t  st;
    uinstr_t u;
  } r1_t;

  typedef struct packed {
    state_t        st;
    uinstr_t       u;
    logic [DW-1:0] a;
    logic [TW-1:0] tid;
  } r2_t;

  localparam int NCH = C - 2;

  r1_t    r1;
  r2_t    r2;
  state_t chain [NCH];

  // ---------------------------------------------------------------- stage U
  state_t  st_u;
  uinstr_t u_u;

  assign st_u = chain[NCH-1];

  control_store u_cs (
    .upc    (st_u.upc),
    .uinstr (u_u)
  );

  // ---------------------------------------------------------------- stage M
  logic [TW-1:0] tid_m;
  logic [DW-1:0] a_m;

  thread_counter #(.C(C)) u_tc (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (en),
    .tid   (tid_m)
  );

  assign mem_en    = en;
  assign mem_tid   = tid_m;
  assign mem_vaddr = r1.st.mar;
  assign mem_we    = en && (r1.u.op == UOP_MEM_STO);
  assign mem_wdata = a_m;

  // ---------------------------------------------------------------- stage X
  decode_t        dec_x;
  logic [DW-1:0]  alu_y;
  logic           alu_we, alu_z, alu_c;
  logic [UAW-1:0] upc_next;
  state_t         st_x;

  instr_decoder #(.DW(DW)) u_dec (
    .ir  (r2.st.ir),
    .dec (dec_x)
  );

  alu #(.DW(DW)) u_alu (
    .op    (r2.u.op),
    .a     (r2.a),
    .b     (r2.st.buffer),
    .c_in  (r2.st.c),
    .y     (alu_y),
    .a_we  (alu_we),
    .z_out (alu_z),
    .c_out (alu_c)
  );

  microsequencer u_seq (
    .upc      (r2.st.upc),
    .uinstr   (r2.u),
    .dec      (dec_x),
    .z        (r2.st.z),
    .c        (r2.st.c),
    .upc_next (upc_next)
  );

  // Register transfers of the micro-step (A is written in the bank below).
  always_comb begin
    st_x     = r2.st;
    st_x.upc = upc_next;
    unique case (r2.u.op)
      UOP_PC_CLR:   st_x.pc = '0;
      UOP_MAR_PC:   st_x.mar = r2.st.pc;
      UOP_IR_FETCH: begin st_x.ir = mem_rdata; st_x.pc = r2.st.pc + DW'(1); end
      UOP_BUF_OPND: begin st_x.buffer = mem_rdata; st_x.pc = r2.st.pc + DW'(1); end
      UOP_MAR_BUF:  st_x.mar = r2.st.buffer;
      UOP_BUF_MEM:  st_x.buffer = mem_rdata;
      UOP_PC_INC:   st_x.pc = r2.st.pc + DW'(1);
      UOP_PC_LOAD:  st_x.pc = mem_rdata;
      default: ;
    endcase
    if (alu_we) begin
      st_x.z = alu_z;
      st_x.c = alu_c;
    end
  end

  // C-banked accumulator: read in stage M, written in stage X.
  cslow_regfile #(.C(C), .NREGS(1), .DW(DW)) u_rf (
    .clk     (clk),
    .rst_n   (rst_n),
    .rd_tid  (tid_m),
    .rd_addr (1'b0),
    .rd_data (a_m),
    .we      (en && alu_we),
    .wr_tid  (r2.tid),
    .wr_addr (1'b0),
    .wr_data (alu_y)
  );

  // ---------------------------------------------------------- loop registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1 <= '{st: '0, u: UINSTR_RESET};
      r2 <= '{st: '0, u: UINSTR_RESET, a: '0, tid: TW'(C - 1)};
      for (int k = 0; k < NCH; k++)
        chain[k] <= '0;
      halted <= '0;
    end else if (en) begin
      r1 <= '{st: st_u, u: u_u};
      r2 <= '{st: r1.st, u: r1.u, a: a_m, tid: tid_m};
      chain[0] <= st_x;
      for (int k = 1; k < NCH; k++)
        chain[k] <= chain[k-1];
      halted[r2.tid] <= (upc_next == UADDR_HALT);
    end
  end

  assign trace_tid   = r2.tid;
  assign trace_upc   = r2.st.upc;
  assign trace_a     = alu_we ? alu_y : r2.a;

  // The thread leaving stage X is always the one after the thread counter's
  // predecessor: the round-robin order never slips.
  assert property (@(posedge clk) disable iff (!rst_n)
                   int'(r2.tid) == ((int'(tid_m) + C - 1) % C));
  // A halted thread stays in the HALT row.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (en && r2.st.upc == UADDR_HALT) |-> (upc_next == UADDR_HALT));

endmodule
