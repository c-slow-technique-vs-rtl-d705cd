// tb_instr_decoder: exhaustive check of the instruction decoder over all
// 256 instruction words against the opcode table (I3 = bit 3, I0 = bit 0,
// XCk one-hot for bits 2:1 = k).
module tb_instr_decoder;
  import cslow_pkg::*;
  logic [7:0] ir;
  decode_t    dec;
  int checks = 0, failures = 0;

  instr_decoder #(.DW(8)) dut (.ir(ir), .dec(dec));

  initial begin
    for (int v = 0; v < 256; v++) begin
      logic [3:0] exp_xc;
      ir = 8'(v);
      #1;
      case ((v >> 1) & 3)
        0: exp_xc = 4'b0001; 1: exp_xc = 4'b0010;
        2: exp_xc = 4'b0100; default: exp_xc = 4'b1000;
      endcase
      checks++;
      if (dec.i3 !== ((v & 8) != 0) || dec.i0 !== ((v & 1) != 0) || dec.xc !== exp_xc) begin
        failures++;
        $display("ir=%02h: i3=%b xc=%b i0=%b", v, dec.i3, dec.xc, dec.i0);
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
