// tb_control_store: checks every row of the microprogram ROM against the
// published row table, transcribed here as (operation, condition, target)
// text so that it does not share the ROM's encoding helpers. Also checks
// that unused addresses 53-63 return "go to HALT".
module tb_control_store;
  import cslow_pkg::*;

  logic [UAW-1:0] upc;
  uinstr_t        u;
  int checks = 0, failures = 0;

  control_store dut (.upc(upc), .uinstr(u));

  // op, cond, target for rows 0..52 (target only meaningful with a condition)
  string exp_op   [53] = '{
    "PC_CLR","MAR_PC","IR_FETCH","NOP","NOP","NOP","NOP","NOP",
    "A_CMA","NOP","A_INC","NOP","A_DEC","NOP",
    "NOP","NOP","NOP",
    "MAR_PC","BUF_OPND","MAR_BUF","BUF_MEM","A_AND","NOP",
    "MAR_PC","BUF_OPND","MAR_BUF","NOP","BUF_MEM","A_LOAD","NOP","MEM_STO","NOP",
    "MAR_PC","BUF_OPND","MAR_BUF","BUF_MEM","NOP","A_ADD","NOP","A_SUB","NOP",
    "MAR_PC","NOP","NOP","NOP","PC_INC","NOP","NOP","PC_INC","NOP","PC_LOAD","NOP","NOP"};
  string exp_cond [53] = '{
    "-","-","-","I3","XC0","XC1","XC2","ALWAYS",
    "-","ALWAYS","-","ALWAYS","-","ALWAYS",
    "XC0","XC1","XC2",
    "-","-","-","-","-","ALWAYS",
    "-","-","-","I0","-","-","ALWAYS","-","ALWAYS",
    "-","-","-","-","I0","-","ALWAYS","-","ALWAYS",
    "-","NI0","I0","Z","-","ALWAYS","C","-","ALWAYS","-","ALWAYS","ALWAYS"};
  int exp_tgt [53] = '{
    0,0,0,14,8,10,12,52,
    0,1,0,1,0,1,
    23,32,41,
    0,0,0,0,0,1,
    0,0,0,30,0,0,1,0,1,
    0,0,0,0,39,0,1,0,1,
    0,44,47,50,0,1,50,0,1,0,1,52};

  function automatic string op_name(uop_e op);
    case (op)
      UOP_PC_CLR: return "PC_CLR";     UOP_NOP: return "NOP";
      UOP_MAR_PC: return "MAR_PC";     UOP_IR_FETCH: return "IR_FETCH";
      UOP_A_CMA: return "A_CMA";       UOP_A_INC: return "A_INC";
      UOP_A_DEC: return "A_DEC";       UOP_BUF_OPND: return "BUF_OPND";
      UOP_MAR_BUF: return "MAR_BUF";   UOP_BUF_MEM: return "BUF_MEM";
      UOP_A_AND: return "A_AND";       UOP_A_LOAD: return "A_LOAD";
      UOP_MEM_STO: return "MEM_STO";   UOP_A_ADD: return "A_ADD";
      UOP_A_SUB: return "A_SUB";       UOP_PC_INC: return "PC_INC";
      UOP_PC_LOAD: return "PC_LOAD";   default: return "?";
    endcase
  endfunction

  function automatic string cond_name(cond_e c);
    case (c)
      COND_NEXT: return "-";   COND_ALWAYS: return "ALWAYS";
      COND_I3: return "I3";    COND_XC0: return "XC0";
      COND_XC1: return "XC1";  COND_XC2: return "XC2";
      COND_I0: return "I0";    COND_NI0: return "NI0";
      COND_Z: return "Z";      COND_C: return "C";
      default: return "?";
    endcase
  endfunction

  initial begin
    for (int r = 0; r < 64; r++) begin
      upc = 6'(r);
      #1;
      checks++;
      if (r < 53) begin
        if (op_name(u.op) != exp_op[r] || cond_name(u.cond) != exp_cond[r] ||
            (exp_cond[r] != "-" && int'(u.target) != exp_tgt[r])) begin
          failures++;
          $display("row %0d: got %s %s %0d, expected %s %s %0d", r, op_name(u.op),
                   cond_name(u.cond), u.target, exp_op[r], exp_cond[r], exp_tgt[r]);
        end
      end else if (u.op != UOP_NOP || u.cond != COND_ALWAYS || u.target != 6'd52) begin
        failures++;
        $display("unused row %0d does not go to HALT", r);
      end
    end
    // reset micro-instruction constant equals row 0
    upc = 0; #1; checks++;
    if (u != UINSTR_RESET) begin failures++; $display("UINSTR_RESET differs from row 0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
