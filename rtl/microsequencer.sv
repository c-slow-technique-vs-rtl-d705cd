// microsequencer: next micro-address logic of the microprogrammed control.
//
// Every micro-instruction carries a condition and a target. If the
// condition holds the sequencer jumps to the target, otherwise it steps to
// upc + 1. Conditions are the ones the microprogram tests: always, never,
// I3, XC0, XC1, XC2, I0, not I0, zero flag z and carry flag c.
// Purely combinational; the rule "branch if true, else next row" is read
// from the published microprogram's "if ... go to" rows.
module microsequencer
  import cslow_pkg::*;
(
  input  logic [UAW-1:0] upc,
  input  uinstr_t        uinstr,
  input  decode_t        dec,
  input  logic           z,
  input  logic           c,
  output logic [UAW-1:0] upc_next
);

  logic take;

  always_comb begin
    unique case (uinstr.cond)
      COND_NEXT:   take = 1'b0;
      COND_ALWAYS: take = 1'b1;
      COND_I3:     take = dec.i3;
      COND_XC0:    take = dec.xc[0];
      COND_XC1:    take = dec.xc[1];
      COND_XC2:    take = dec.xc[2];
      COND_I0:     take = dec.i0;
      COND_NI0:    take = ~dec.i0;
      COND_Z:      take = z;
      COND_C:      take = c;
      default:     take = 1'b0;
    endcase
    upc_next = take ? uinstr.target : upc + UAW'(1);
  end

endmodule
