// instr_decoder: splits the instruction register into the signals the
// microprogram branches on.
//
// I3 = IR[3] marks a memory-reference instruction, XC0..XC3 is a one-hot
// 2-to-4 decode of IR[2:1] (the instruction within its class), and
// I0 = IR[0] picks between the two halves of a pair (LOAD/STO, ADD/SUB,
// JOZ/JOC). Purely combinational.
//
// The paper names I3, I0 and XC0..XC2 but not the bits behind them; the bit
// assignment here is this design's own. With it the opcodes are:
//   I3=0: XC0 CMA, XC1 INCA, XC2 DCRA, XC3 HALT
//   I3=1: XC0 LOAD(I0=0)/STO(I0=1), XC1 ADD/SUB, XC2 JOZ/JOC, XC3 AND
module instr_decoder
  import cslow_pkg::*;
#(
  parameter int DW = 8
) (
  input  logic [DW-1:0] ir,
  output decode_t       dec
);

  always_comb begin
    dec.i3 = ir[3];
    dec.i0 = ir[0];
    for (int k = 0; k < 4; k++)
      dec.xc[k] = (ir[2:1] == 2'(k));
  end

endmodule
