// control_store: the microprogram ROM of the accumulator processor.
//
// Holds the 53 micro-instructions, one per row of the published symbolic
// microprogram, at the addresses printed there: reset (0), fetch (1-2),
// decode (3-7), the register instructions CMA/INCA/DCRA (8-13), the
// memory-reference decode (14-16) and routines AND (17-22), LOAD/STO
// (23-31), ADD/SUB (32-40), JOZ/JOC (41-51) and HALT (52). A row performs
// either one register transfer or one branch, as printed.
//
// Interface: purely combinational, upc -> uinstr. Addresses 53-63 are not
// used by the microprogram and return "go to HALT".
//
// Follows the paper: the row contents and addresses. This design's own
// choices: the field encoding (see cslow_pkg); row 36 prints "if I0 = , go
// to SUB" without a value, I0 = 1 is used (as in row 26, where I0 = 1 picks
// the second instruction of the pair); "Buffer <- (MAR)" in row 33 is read
// as Buffer <- M(MAR).
module control_store
  import cslow_pkg::*;
(
  input  logic [UAW-1:0] upc,
  output uinstr_t        uinstr
);

  function automatic uinstr_t mi(uop_e op, cond_e cond, logic [UAW-1:0] target);
    return '{op: op, cond: cond, target: target};
  endfunction

  localparam logic [UAW-1:0] FETCH = 1, CMA = 8, INCA = 10, DCRA = 12, MEMREF = 14;
  localparam logic [UAW-1:0] LDSTO = 23, STO = 30, ADSUB = 32, SUB = 39, JUMP = 41;
  localparam logic [UAW-1:0] JOZ = 44, JOC = 47, LOADPC = 50, HALT = 52;

  always_comb begin
    unique case (upc)
      6'd0:  uinstr = mi(UOP_PC_CLR,   COND_NEXT,   '0);      // pc <- 0
      // Fetch
      6'd1:  uinstr = mi(UOP_MAR_PC,   COND_NEXT,   '0);      // MAR <- pc
      6'd2:  uinstr = mi(UOP_IR_FETCH, COND_NEXT,   '0);      // IR <- M(MAR); pc <- pc+1
      // Decode
      6'd3:  uinstr = mi(UOP_NOP,      COND_I3,     MEMREF);
      6'd4:  uinstr = mi(UOP_NOP,      COND_XC0,    CMA);
      6'd5:  uinstr = mi(UOP_NOP,      COND_XC1,    INCA);
      6'd6:  uinstr = mi(UOP_NOP,      COND_XC2,    DCRA);
      6'd7:  uinstr = mi(UOP_NOP,      COND_ALWAYS, HALT);
      // CMA, INCA, DCRA
      6'd8:  uinstr = mi(UOP_A_CMA,    COND_NEXT,   '0);
      6'd9:  uinstr = mi(UOP_NOP,      COND_ALWAYS, FETCH);
      6'd10: uinstr = mi(UOP_A_INC,    COND_NEXT,   '0);
      6'd11: uinstr = mi(UOP_NOP,      COND_ALWAYS, FETCH);
      6'd12: uinstr = mi(UOP_A_DEC,    COND_NEXT,   '0);
      6'd13: uinstr = mi(UOP_NOP,      COND_ALWAYS, FETCH);
      // MEMREF
      6'd14: uinstr = mi(UOP_NOP,      COND_XC0,    LDSTO);
      6'd15: uinstr = mi(UOP_NOP,      COND_XC1,    ADSUB);
      6'd16: uinstr = mi(UOP_NOP,      COND_XC2,    JUMP);
      // AND
      6'd17: uinstr = mi(UOP_MAR_PC,   COND_NEXT,   '0);
      6'd18: uinstr = mi(UOP_BUF_OPND, COND_NEXT,   '0);
      6'd19: uinstr = mi(UOP_MAR_BUF,  COND_NEXT,   '0);
      6'd20: uinstr = mi(UOP_BUF_MEM,  COND_NEXT,   '0);
      6'd21: uinstr = mi(UOP_A_AND,    COND_NEXT,   '0);
      6'd22: uinstr = mi(UOP_NOP,      COND_ALWAYS, FETCH);
      // LDSTO
      6'd23: uinstr = mi(UOP_MAR_PC,   COND_NEXT,   '0);
      6'd24: uinstr = mi(UOP_BUF_OPND, COND_NEXT,   '0);
      6'd25: uinstr = mi(UOP_MAR_BUF,  COND_NEXT,   '0);
      6'd26: uinstr = mi(UOP_NOP,      COND_I0,     STO);
      6'd27: uinstr = mi(UOP_BUF_MEM,  COND_NEXT,   '0);      // LOAD
      6'd28: uinstr = mi(UOP_A_LOAD,   COND_NEXT,   '0);
      6'd29: uinstr = mi(UOP_NOP,      COND_ALWAYS, FETCH);
      6'd30: uinstr = mi(UOP_MEM_STO,  COND_NEXT,   '0);      // STO
      6'd31: uinstr = mi(UOP_NOP,      COND_ALWAYS, FETCH);
      // ADSUB
      6'd32: uinstr = mi(UOP_MAR_PC,   COND_NEXT,   '0);
      6'd33: uinstr = mi(UOP_BUF_OPND, COND_NEXT,   '0);
      6'd34: uinstr = mi(UOP_MAR_BUF,  COND_NEXT,   '0);
      6'd35: uinstr = mi(UOP_BUF_MEM,  COND_NEXT,   '0);
      6'd36: uinstr = mi(UOP_NOP,      COND_I0,     SUB);
      6'd37: uinstr = mi(UOP_A_ADD,    COND_NEXT,   '0);      // ADD
      6'd38: uinstr = mi(UOP_NOP,      COND_ALWAYS, FETCH);
      6'd39: uinstr = mi(UOP_A_SUB,    COND_NEXT,   '0);      // SUB
      6'd40: uinstr = mi(UOP_NOP,      COND_ALWAYS, FETCH);
      // JUMP
      6'd41: uinstr = mi(UOP_MAR_PC,   COND_NEXT,   '0);
      6'd42: uinstr = mi(UOP_NOP,      COND_NI0,    JOZ);
      6'd43: uinstr = mi(UOP_NOP,      COND_I0,     JOC);
      6'd44: uinstr = mi(UOP_NOP,      COND_Z,      LOADPC); // JOZ
      6'd45: uinstr = mi(UOP_PC_INC,   COND_NEXT,   '0);
      6'd46: uinstr = mi(UOP_NOP,      COND_ALWAYS, FETCH);
      6'd47: uinstr = mi(UOP_NOP,      COND_C,      LOADPC); // JOC
      6'd48: uinstr = mi(UOP_PC_INC,   COND_NEXT,   '0);
      6'd49: uinstr = mi(UOP_NOP,      COND_ALWAYS, FETCH);
      6'd50: uinstr = mi(UOP_PC_LOAD,  COND_NEXT,   '0);      // LOADPC
      6'd51: uinstr = mi(UOP_NOP,      COND_ALWAYS, FETCH);
      6'd52: uinstr = mi(UOP_NOP,      COND_ALWAYS, HALT);   // HALT
      default: uinstr = mi(UOP_NOP,    COND_ALWAYS, HALT);
    endcase
  end

endmodule
