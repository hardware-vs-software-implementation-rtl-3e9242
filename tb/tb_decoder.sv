// tb_decoder: checks the decoder on every instruction class.
//
// Each case encodes an instruction with the testbench assembler and compares
// the decoded unit, ALU operation, register fields, immediate and vote/shuffle
// fields with the values the encoding was built from.
module tb_decoder;
  import wlf_pkg::*;
  import wlf_asm_pkg::*;

  logic [31:0] instr;
  dec_t        dec;
  int checks = 0, failures = 0;

  decoder dut (.instr, .dec);

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h (instr %h)", what, got, exp, instr);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr = addi(5, 6, -3); #1;
    chk("addi unit", dec.unit, EX_ALU);   chk("addi op", dec.alu_op, ALU_ADD);
    chk("addi rd", dec.rd, 5);            chk("addi rs1", dec.rs1, 6);
    chk("addi imm", dec.imm, 32'hFFFF_FFFD); chk("addi useimm", dec.use_imm, 1);
    chk("addi wb", dec.wb, 1);
    instr = sub(7, 8, 9); #1;
    chk("sub op", dec.alu_op, ALU_SUB);   chk("sub rs2", dec.rs2, 9);
    chk("sub useimm", dec.use_imm, 0);
    instr = srli(3, 4, 2); #1;
    chk("srli op", dec.alu_op, ALU_SRL);
    instr = enc_i(7'h13, 3'b101, 3, 4, 32'h402); #1;
    chk("srai op", dec.alu_op, ALU_SRA);
    instr = andi(3, 4, 15); #1;
    chk("andi op", dec.alu_op, ALU_AND);
    instr = lui(2, 20'hABCDE); #1;
    chk("lui op", dec.alu_op, ALU_LUI);   chk("lui imm", dec.imm, 32'hABCDE000);
    instr = csrr(4, 12'hCC0); #1;
    chk("csr unit", dec.unit, EX_CSR);    chk("csr addr", dec.csr, 12'hCC0);
    chk("csr wb", dec.wb, 1);
    instr = ecall(); #1;
    chk("ecall unit", dec.unit, EX_HALT); chk("ecall wb", dec.wb, 0);
    for (int m = 0; m < 4; m++) begin
      instr = vx_vote(10, 11, m, 12); #1;
      chk("vote unit", dec.unit, EX_VOTE); chk("vote mode", dec.mode, m);
      chk("vote rs1", dec.rs1, 11);        chk("vote mreg", dec.rs3, 12);
      chk("vote rd", dec.rd, 10);          chk("vote wb", dec.wb, 1);
      instr = vx_shfl(13, 14, m, 37, 15); #1;
      chk("shfl unit", dec.unit, EX_SHFL); chk("shfl mode", dec.mode, m);
      chk("shfl delta", dec.lane_off, 37); chk("shfl creg", dec.rs3, 15);
      chk("shfl rs1", dec.rs1, 14);
    end
    instr = vx_tile(20, 21); #1;
    chk("tile unit", dec.unit, EX_TILE);  chk("tile rs1", dec.rs1, 20);
    chk("tile rs2", dec.rs2, 21);         chk("tile wb", dec.wb, 0);
    instr = addi(0, 1, 1); #1;
    chk("x0 no wb", dec.wb, 0);
    instr = 32'hFFFF_FFFF; #1;
    chk("illegal", dec.legal, 0);         chk("illegal unit", dec.unit, EX_NOP);
    instr = enc_i(7'h0B, 3'b100, 1, 2, 3); #1;
    chk("bad vote", dec.legal, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
