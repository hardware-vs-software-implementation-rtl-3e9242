// wlf_asm_pkg: instruction encoders used by the testbenches.
//
// Each function returns the 32-bit encoding of one instruction of the
// warp-level-feature core (RV32I subset plus vx_vote, vx_shfl and vx_tile,
// laid out as described in wlf_pkg).
package wlf_asm_pkg;

  function automatic logic [31:0] enc_i(logic [6:0] opc, logic [2:0] f3, int rd, int rs1, int imm);
    return {imm[11:0], 5'(rs1), f3, 5'(rd), opc};
  endfunction

  function automatic logic [31:0] enc_r(logic [6:0] opc, logic [2:0] f3, logic [6:0] f7,
                                        int rd, int rs1, int rs2);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), opc};
  endfunction

  function automatic logic [31:0] addi(int rd, int rs1, int imm);
    return enc_i(7'h13, 3'b000, rd, rs1, imm);
  endfunction
  function automatic logic [31:0] slli(int rd, int rs1, int sh);
    return enc_i(7'h13, 3'b001, rd, rs1, sh);
  endfunction
  function automatic logic [31:0] srli(int rd, int rs1, int sh);
    return enc_i(7'h13, 3'b101, rd, rs1, sh);
  endfunction
  function automatic logic [31:0] andi(int rd, int rs1, int imm);
    return enc_i(7'h13, 3'b111, rd, rs1, imm);
  endfunction
  function automatic logic [31:0] add(int rd, int rs1, int rs2);
    return enc_r(7'h33, 3'b000, 7'h00, rd, rs1, rs2);
  endfunction
  function automatic logic [31:0] sub(int rd, int rs1, int rs2);
    return enc_r(7'h33, 3'b000, 7'h20, rd, rs1, rs2);
  endfunction
  function automatic logic [31:0] lui(int rd, int imm20);
    return {imm20[19:0], 5'(rd), 7'h37};
  endfunction
  function automatic logic [31:0] csrr(int rd, int csr);
    return enc_i(7'h73, 3'b010, rd, 0, csr);
  endfunction
  function automatic logic [31:0] ecall();
    return 32'h0000_0073;
  endfunction
  // vx_vote rd, rs1(value), mode, member-mask register
  function automatic logic [31:0] vx_vote(int rd, int rs1, int mode, int mreg);
    return enc_i(7'h0B, 3'(mode), rd, rs1, mreg);
  endfunction
  // vx_shfl rd, rs1(value), mode, lane offset, clamp register
  function automatic logic [31:0] vx_shfl(int rd, int rs1, int mode, int delta, int creg);
    return enc_i(7'h2B, 3'(mode), rd, rs1, (delta << 5) | creg);
  endfunction
  // vx_tile rs1(group mask), rs2(thread count)
  function automatic logic [31:0] vx_tile(int rs1, int rs2);
    return enc_r(7'h5B, 3'b000, 7'h00, 0, rs1, rs2);
  endfunction

endpackage
