// tb_alu: random operands for every micro-operation; the expected
// accumulator, write enable and flags are computed with integer arithmetic
// (carry = result above 255, borrow = result below 0).
module tb_alu;
  import cslow_pkg::*;
  uop_e       op;
  logic [7:0] a, b, y;
  logic       c_in, a_we, z_out, c_out;
  int checks = 0, failures = 0;

  alu #(.DW(8)) dut (.op(op), .a(a), .b(b), .c_in(c_in), .y(y), .a_we(a_we),
                     .z_out(z_out), .c_out(c_out));

  initial begin
    for (int i = 0; i < 6000; i++) begin
      int ia, ib, r;
      bit ewe, ec;
      op   = uop_e'(i % 17);
      a    = 8'($urandom); b = 8'($urandom); c_in = 1'($urandom);
      if (i % 97 == 0) a = 8'hFF;
      if (i % 89 == 0) a = 8'h00;
      ia = int'(a); ib = int'(b);
      ewe = 1; ec = c_in;
      case (op)
        UOP_A_CMA:  r = 255 - ia;
        UOP_A_INC:  begin r = ia + 1;  ec = (r > 255); end
        UOP_A_DEC:  begin r = ia - 1;  ec = (r < 0);   end
        UOP_A_AND:  r = ia & ib;
        UOP_A_LOAD: r = ib;
        UOP_A_ADD:  begin r = ia + ib; ec = (r > 255); end
        UOP_A_SUB:  begin r = ia - ib; ec = (r < 0);   end
        default:    begin r = ia; ewe = 0; end
      endcase
      r = r & 255;
      #1;
      checks++;
      if (a_we !== ewe || (ewe && (int'(y) != r || z_out !== (r == 0) || c_out !== ec))) begin
        failures++;
        $display("op %s a=%0d b=%0d: y=%0d we=%b z=%b c=%b, expected %0d %b %b", op.name(),
                 ia, ib, y, a_we, z_out, c_out, r, ewe, ec);
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
