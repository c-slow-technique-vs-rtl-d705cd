// alu: accumulator arithmetic of the processor.
//
// For the micro-operations that write the accumulator it returns the new A
// and the new flags: CMA (A <- ~A), INC (A+1), DEC (A-1), AND (A & Buffer),
// LOAD (A <- Buffer), ADD (A + Buffer) and SUB (A - Buffer). a_we tells the
// caller whether the operation writes A at all. Purely combinational.
//
// Flag rules are this design's choice (the paper tests z and c but does not
// say what sets them): z is set when the new A is zero, on every write of A;
// c is the carry out of INC/ADD and the borrow of DEC/SUB (bit DW of the
// DW+1-bit result); CMA, AND and LOAD leave c unchanged.
module alu
  import cslow_pkg::*;
#(
  parameter int DW = 8
) (
  input  uop_e          op,
  input  logic [DW-1:0] a,
  input  logic [DW-1:0] b,
  input  logic          c_in,
  output logic [DW-1:0] y,
  output logic          a_we,
  output logic          z_out,
  output logic          c_out
);

  logic [DW:0] wide;

  always_comb begin
    wide  = '0;
    a_we  = 1'b1;
    c_out = c_in;
    unique case (op)
      UOP_A_CMA:  wide = {1'b0, ~a};
      UOP_A_INC:  begin wide = {1'b0, a} + (DW+1)'(1); c_out = wide[DW]; end
      UOP_A_DEC:  begin wide = {1'b0, a} - (DW+1)'(1); c_out = wide[DW]; end
      UOP_A_AND:  wide = {1'b0, a & b};
      UOP_A_LOAD: wide = {1'b0, b};
      UOP_A_ADD:  begin wide = {1'b0, a} + {1'b0, b}; c_out = wide[DW]; end
      UOP_A_SUB:  begin wide = {1'b0, a} - {1'b0, b}; c_out = wide[DW]; end
      default:    begin wide = {1'b0, a}; a_we = 1'b0; end
    endcase
    y     = wide[DW-1:0];
    z_out = (y == '0);
  end

endmodule
