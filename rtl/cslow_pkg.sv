// cslow_pkg: types and constants shared by the C-slow microprogrammed processor.
//
// The processor is a small accumulator machine controlled by a 53-entry
// microprogram. Each micro-instruction holds one register transfer (uop_e),
// one branch condition (cond_e) and one 6-bit branch target. A micro-step
// either performs its transfer and falls through to the next address, or
// tests its condition and branches. The field encodings below are this
// design's own; the micro-operations and conditions themselves are the ones
// the microprogram uses.
//
// Instruction encoding (this design's choice, the published microprogram
// only names the decoded signals): IR[3] = I3 (memory reference),
// IR[2:1] selects one of XC0..XC3, IR[0] = I0 (variant). IR[7:4] is ignored.
package cslow_pkg;

  localparam int UAW = 6;                    // micro-address width (53 rows)
  localparam logic [UAW-1:0] UADDR_HALT  = 6'd52;

  // Register transfers of the microprogram.
  typedef enum logic [4:0] {
    UOP_PC_CLR   = 5'd0,   // pc <- 0
    UOP_NOP      = 5'd1,   // branch-only row
    UOP_MAR_PC   = 5'd2,   // MAR <- pc
    UOP_IR_FETCH = 5'd3,   // IR <- M(MAR); pc <- pc+1
    UOP_A_CMA    = 5'd4,   // A <- ~A
    UOP_A_INC    = 5'd5,   // A <- A+1
    UOP_A_DEC    = 5'd6,   // A <- A-1
    UOP_BUF_OPND = 5'd7,   // Buffer <- M(MAR); pc <- pc+1
    UOP_MAR_BUF  = 5'd8,   // MAR <- Buffer
    UOP_BUF_MEM  = 5'd9,   // Buffer <- M(MAR)
    UOP_A_AND    = 5'd10,  // A <- A & Buffer
    UOP_A_LOAD   = 5'd11,  // A <- Buffer
    UOP_MEM_STO  = 5'd12,  // M(MAR) <- A
    UOP_A_ADD    = 5'd13,  // A <- A + Buffer
    UOP_A_SUB    = 5'd14,  // A <- A - Buffer
    UOP_PC_INC   = 5'd15,  // pc <- pc+1
    UOP_PC_LOAD  = 5'd16   // pc <- M(MAR)
  } uop_e;

  // Branch conditions of the microprogram.
  typedef enum logic [3:0] {
    COND_NEXT   = 4'd0,    // never branch
    COND_ALWAYS = 4'd1,
    COND_I3     = 4'd2,
    COND_XC0    = 4'd3,
    COND_XC1    = 4'd4,
    COND_XC2    = 4'd5,
    COND_I0     = 4'd6,
    COND_NI0    = 4'd7,    // I0 = 0
    COND_Z      = 4'd8,
    COND_C      = 4'd9
  } cond_e;

  typedef struct packed {
    uop_e           op;
    cond_e          cond;
    logic [UAW-1:0] target;
  } uinstr_t;

  // Micro-instruction at address 0 (pc <- 0, fall through).
  localparam uinstr_t UINSTR_RESET = '{op: UOP_PC_CLR, cond: COND_NEXT, target: '0};

  // Decoded instruction register.
  typedef struct packed {
    logic       i3;
    logic [3:0] xc;
    logic       i0;
  } decode_t;

  // True for micro-operations that read memory in the memory stage.
  function automatic logic uop_reads_mem(uop_e op);
    return op inside {UOP_IR_FETCH, UOP_BUF_OPND, UOP_BUF_MEM, UOP_PC_LOAD};
  endfunction

endpackage
