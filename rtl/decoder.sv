// decoder: instruction decoder of the warp-level-feature core.
//
// Purely combinational. It turns one 32-bit instruction into a dec_t record
// (see wlf_pkg) naming the execution unit, the ALU operation, the registers to
// read and write and the immediate. Besides a small RV32I integer subset
// (OP, OP-IMM, LUI, csrrs for the thread-identity CSRs, ecall as "warp done")
// it decodes the three instructions the warp-level extension adds:
//   vx_vote (CUSTOM0, I-type)  vx_shfl (CUSTOM1, I-type)  vx_tile (CUSTOM2, R-type).
// The opcodes, formats and the four modes of vote and shuffle are the paper's
// (its Table I); that the member-mask / clamp register address sits in
// imm[4:0] and the lane offset in imm[11:5] is this design's own layout.
// Unknown encodings decode as a legal=0 no-operation.
module decoder
  import wlf_pkg::*;
(
  input  logic [31:0] instr,
  output dec_t        dec
);

  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [6:0] funct7;
  logic [31:0] imm_i, imm_u;

  assign opcode = instr[6:0];
  assign funct3 = instr[14:12];
  assign funct7 = instr[31:25];
  assign imm_i  = {{20{instr[31]}}, instr[31:20]};
  assign imm_u  = {instr[31:12], 12'b0};

  always_comb begin
    dec          = '0;
    dec.unit     = EX_NOP;
    dec.alu_op   = ALU_ADD;
    dec.rd       = instr[11:7];
    dec.rs1      = instr[19:15];
    dec.rs2      = instr[24:20];
    dec.rs3      = instr[24:20];        // imm[4:0] of an I-type
    dec.imm      = imm_i;
    dec.mode     = funct3[1:0];
    dec.lane_off = instr[31:25];        // imm[11:5] of an I-type
    dec.csr      = instr[31:20];
    unique case (opcode)
      OPC_OP_IMM: begin
        dec.legal   = 1'b1;
        dec.unit    = EX_ALU;
        dec.use_imm = 1'b1;
        dec.wb      = 1'b1;
        unique case (funct3)
          3'b000: dec.alu_op = ALU_ADD;
          3'b001: dec.alu_op = ALU_SLL;
          3'b010: dec.alu_op = ALU_SLT;
          3'b011: dec.alu_op = ALU_SLTU;
          3'b100: dec.alu_op = ALU_XOR;
          3'b101: dec.alu_op = funct7[5] ? ALU_SRA : ALU_SRL;
          3'b110: dec.alu_op = ALU_OR;
          3'b111: dec.alu_op = ALU_AND;
        endcase
      end
      OPC_OP: begin
        if (funct7 == 7'b0 || (funct7 == 7'b0100000 && (funct3 == 3'b000 || funct3 == 3'b101))) begin
          dec.legal = 1'b1;
          dec.unit  = EX_ALU;
          dec.wb    = 1'b1;
          unique case (funct3)
            3'b000: dec.alu_op = funct7[5] ? ALU_SUB : ALU_ADD;
            3'b001: dec.alu_op = ALU_SLL;
            3'b010: dec.alu_op = ALU_SLT;
            3'b011: dec.alu_op = ALU_SLTU;
            3'b100: dec.alu_op = ALU_XOR;
            3'b101: dec.alu_op = funct7[5] ? ALU_SRA : ALU_SRL;
            3'b110: dec.alu_op = ALU_OR;
            3'b111: dec.alu_op = ALU_AND;
          endcase
        end
      end
      OPC_LUI: begin
        dec.legal   = 1'b1;
        dec.unit    = EX_ALU;
        dec.alu_op  = ALU_LUI;
        dec.use_imm = 1'b1;
        dec.wb      = 1'b1;
        dec.imm     = imm_u;
      end
      OPC_SYSTEM: begin
        if (funct3 == 3'b000 && instr[31:7] == 25'b0) begin
          dec.legal = 1'b1;                 // ecall: the warp has finished
          dec.unit  = EX_HALT;
        end else if (funct3 == 3'b010 && instr[19:15] == 5'd0) begin
          dec.legal = 1'b1;                 // csrrs rd, csr, x0 (read only)
          dec.unit  = EX_CSR;
          dec.wb    = 1'b1;
        end
      end
      OPC_CUSTOM0: begin
        if (funct3[2] == 1'b0) begin
          dec.legal = 1'b1;
          dec.unit  = EX_VOTE;
          dec.wb    = 1'b1;
        end
      end
      OPC_CUSTOM1: begin
        if (funct3[2] == 1'b0) begin
          dec.legal = 1'b1;
          dec.unit  = EX_SHFL;
          dec.wb    = 1'b1;
        end
      end
      OPC_CUSTOM2: begin
        if (funct3 == 3'b000 && funct7 == 7'b0) begin
          dec.legal = 1'b1;
          dec.unit  = EX_TILE;
        end
      end
      default: ;
    endcase
    if (dec.rd == '0) dec.wb = 1'b0;
  end

endmodule
