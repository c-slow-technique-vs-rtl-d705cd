// tb_microsequencer: drives every condition with random micro-addresses,
// targets, decode bits and flags, and compares the next micro-address with
// the rule "target if the condition holds, else address + 1".
module tb_microsequencer;
  import cslow_pkg::*;
  logic [UAW-1:0] upc, upc_next;
  uinstr_t        u;
  decode_t        dec;
  logic           z, c;
  int checks = 0, failures = 0;

  microsequencer dut (.upc(upc), .uinstr(u), .dec(dec), .z(z), .c(c), .upc_next(upc_next));

  initial begin
    for (int i = 0; i < 4000; i++) begin
      bit take;
      int cv;
      cv = i % 10;
      upc      = 6'($urandom_range(0, 62));
      u.op     = UOP_NOP;
      u.cond   = cond_e'(cv);
      u.target = 6'($urandom);
      dec      = decode_t'($urandom);
      z        = 1'($urandom);
      c        = 1'($urandom);
      #1;
      case (cv)
        0: take = 0;            1: take = 1;
        2: take = dec.i3;       3: take = dec.xc[0];
        4: take = dec.xc[1];    5: take = dec.xc[2];
        6: take = dec.i0;       7: take = !dec.i0;
        8: take = z;            default: take = c;
      endcase
      checks++;
      if (upc_next !== (take ? u.target : upc + 6'd1)) begin
        failures++;
        $display("cond %0d upc %0d target %0d: got %0d", cv, upc, u.target, upc_next);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
