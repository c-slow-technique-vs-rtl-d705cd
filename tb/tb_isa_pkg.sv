// tb_isa_pkg: instruction-level reference model of the accumulator ISA,
// used by the testbenches to predict results and micro-step counts.
//
// The model works one instruction at a time, not one micro-step, so it is
// independent of the microprogram it checks. It knows how many micro-steps
// (microprogram rows) each instruction takes on its path through the
// microprogram, counted by hand from the row table:
//   reset row 1; CMA 6; INCA 7; DCRA 8; HALT 7 (up to entering the HALT
//   row); LOAD 11; STO 10; ADD 12; SUB 12; AND 12; JOZ 11; JOC 12.
// Opcodes (low nibble; upper nibble ignored):
//   0 CMA, 2 INCA, 4 DCRA, 6 HALT, 8 LOAD a, 9 STO a, A ADD a, B SUB a,
//   C JOZ t, D JOC t, E AND a   (memory-reference ones take a second word)
// The class also generates random terminating programs: all jumps go
// forward, and the last instruction is HALT.
package tb_isa_pkg;

  localparam byte OP_CMA = 8'h00, OP_INCA = 8'h02, OP_DCA = 8'h04, OP_HALT = 8'h06;
  localparam byte OP_LOAD = 8'h08, OP_STO = 8'h09, OP_ADD = 8'h0A, OP_SUB = 8'h0B;
  localparam byte OP_JOZ = 8'h0C, OP_JOC = 8'h0D, OP_AND = 8'h0E;

  // Mechanism counters: index by the opcode low nibble, plus branch outcomes.
  typedef struct {
    int op_count [16];
    int joz_taken, joz_not, joc_taken, joc_not;
  } cover_t;

  class isa_prog;
    byte unsigned img [256];     // initial memory image
    byte unsigned fin [256];     // memory after the run
    byte unsigned a;
    bit           z, c;
    int           steps;         // micro-steps until the HALT row is entered
    int           ninstr;
    cover_t       cov;

    function new();
      foreach (img[i]) img[i] = 8'(($urandom));
    endfunction

    // Random forward-only program of about n instructions.
    function void gen(int n);
      int pc = 0;
      int starts [$];
      int fix [$];          // positions of jump targets to patch
      for (int i = 0; i < n && pc < 180; i++) begin
        int kind = int'($urandom_range(0, 10));
        byte unsigned op;
        starts.push_back(pc);
        case (kind)
          0: op = OP_CMA;  1: op = OP_INCA; 2: op = OP_DCA;
          3: op = OP_LOAD; 4: op = OP_STO;  5: op = OP_ADD; 6: op = OP_SUB;
          7: op = OP_JOZ;  8: op = OP_JOC;  9: op = OP_AND; default: op = OP_LOAD;
        endcase
        op = op | byte'($urandom_range(0, 15) << 4);     // noise in ignored bits
        img[pc] = op; pc++;
        if (op[3]) begin
          if (op[2:1] == 2'd2) begin fix.push_back(pc); img[pc] = 0; end
          else img[pc] = 8'($urandom_range(8'hC0, 8'hFF));
          pc++;
        end
      end
      starts.push_back(pc);
      img[pc] = OP_HALT;
      // jump targets: any later instruction start
      foreach (fix[j]) begin
        int cand [$];
        foreach (starts[s]) if (starts[s] > fix[j]) cand.push_back(starts[s]);
        img[fix[j]] = 8'(cand[$urandom_range(0, cand.size() - 1)]);
      end
    endfunction

    // Execute to HALT; returns 0 if it did not halt within max_instr.
    function bit run(int max_instr = 10000);
      byte unsigned pc = 0, ir, opnd, b;
      bit [8:0] w;
      fin = img; a = 0; z = 0; c = 0; steps = 1; ninstr = 0;
      foreach (cov.op_count[i]) cov.op_count[i] = 0;
      cov.joz_taken = 0; cov.joz_not = 0; cov.joc_taken = 0; cov.joc_not = 0;
      repeat (max_instr) begin
        ir = fin[pc]; pc++; ninstr++;
        if (!ir[3]) begin
          cov.op_count[{ir[2:1], 1'b0}]++;
          case (ir[2:1])
            2'd0: begin a = ~a; z = (a == 0); steps += 6; end
            2'd1: begin w = {1'b0, a} + 9'd1; a = w[7:0]; c = w[8]; z = (a == 0); steps += 7; end
            2'd2: begin w = {1'b0, a} - 9'd1; a = w[7:0]; c = w[8]; z = (a == 0); steps += 8; end
            default: begin steps += 7; return 1; end
          endcase
        end else begin
          cov.op_count[{1'b1, ir[2:1], (ir[2:1] == 2'd3) ? 1'b0 : ir[0]}]++;
          case (ir[2:1])
            2'd0: begin
              opnd = fin[pc]; pc++;
              if (ir[0]) begin fin[opnd] = a; steps += 10; end
              else begin a = fin[opnd]; z = (a == 0); steps += 11; end
            end
            2'd1: begin
              opnd = fin[pc]; pc++; b = fin[opnd];
              if (ir[0]) w = {1'b0, a} - {1'b0, b}; else w = {1'b0, a} + {1'b0, b};
              a = w[7:0]; c = w[8]; z = (a == 0); steps += 12;
            end
            2'd2: begin
              if (!ir[0]) begin
                steps += 11;
                if (z) begin pc = fin[pc]; cov.joz_taken++; end else begin pc++; cov.joz_not++; end
              end else begin
                steps += 12;
                if (c) begin pc = fin[pc]; cov.joc_taken++; end else begin pc++; cov.joc_not++; end
              end
            end
            default: begin
              opnd = fin[pc]; pc++; a = a & fin[opnd]; z = (a == 0); steps += 12;
            end
          endcase
        end
      end
      return 0;
    endfunction
  endclass

endpackage
