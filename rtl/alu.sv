// alu: execute-stage integer unit, extended with vote and shuffle.
//
// Combinational, LANES lanes wide. For integer instructions each lane computes
// its own result from operand a (rs1) and operand b (rs2 or the immediate).
// csrrs reads the thread-identity CSRs: rank in the group (thread_rank),
// group index = first hardware thread / group size (meta_group_rank), hardware
// thread number and group size (num_threads), i.e. the cooperative-group
// accessors of the paper's Table IV computed in hardware. vx_vote and vx_shfl
// go to the vote_unit and shfl_unit, which combine values across lanes of
// the executing group; their third operand c is the register named in the
// immediate (member mask or clamp). The lanes arrive in group order from the operand crossbar, so the
// group-size-dependent results only need gsize, as the paper asks of the
// execute unit ("we modify the execute unit to guarantee correct operations
// when the output depends on group size").
// That vote and shuffle sit beside the ALU follows the paper's Fig. 2; the
// integer subset and the CSR numbers are this design's choice.
module alu
  import wlf_pkg::*;
#(
  parameter int unsigned LANES = 32
) (
  input  dec_t                             dec,
  input  logic [$clog2(LANES+1)-1:0]       gsize,
  input  logic [$clog2(LANES)-1:0]         group_base,  // first hardware thread of the group
  input  logic [LANES-1:0]                 lane_act,
  input  logic [LANES-1:0][XLEN-1:0]       opa,
  input  logic [LANES-1:0][XLEN-1:0]       opb,
  input  logic [LANES-1:0][XLEN-1:0]       opc,
  output logic [LANES-1:0][XLEN-1:0]       result
);

  logic [LANES-1:0][XLEN-1:0] vote_res, shfl_res;

  vote_unit #(.LANES(LANES), .XLEN(XLEN)) u_vote (
    .mode    (dec.mode),
    .gsize   (gsize),
    .lane_act(lane_act),
    .value   (opa),
    .member  (opc),
    .result  (vote_res)
  );

  shfl_unit #(.LANES(LANES), .XLEN(XLEN)) u_shfl (
    .mode    (dec.mode),
    .delta   (dec.lane_off),
    .gsize   (gsize),
    .lane_act(lane_act),
    .value   (opa),
    .clamp   (opc),
    .result  (shfl_res)
  );

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic [XLEN-1:0] a, b;
      a = opa[i];
      b = dec.use_imm ? dec.imm : opb[i];
      result[i] = '0;
      unique case (dec.unit)
        EX_ALU: begin
          unique case (dec.alu_op)
            ALU_ADD:  result[i] = a + b;
            ALU_SUB:  result[i] = a - b;
            ALU_SLL:  result[i] = a << b[4:0];
            ALU_SLT:  result[i] = XLEN'($signed(a) < $signed(b));
            ALU_SLTU: result[i] = XLEN'(a < b);
            ALU_XOR:  result[i] = a ^ b;
            ALU_SRL:  result[i] = a >> b[4:0];
            ALU_SRA:  result[i] = $unsigned($signed(a) >>> b[4:0]);
            ALU_OR:   result[i] = a | b;
            ALU_AND:  result[i] = a & b;
            ALU_LUI:  result[i] = b;
            default:  result[i] = '0;
          endcase
        end
        EX_CSR: begin
          unique case (dec.csr)
            CSR_THREAD_ID:  result[i] = XLEN'(i);
            CSR_GROUP_ID:   result[i] = (gsize == '0) ? '0 : XLEN'(group_base) / XLEN'(gsize);
            CSR_GTHREAD_ID: result[i] = XLEN'(group_base) + XLEN'(i);
            CSR_GROUP_SIZE: result[i] = XLEN'(gsize);
            default:        result[i] = '0;
          endcase
        end
        EX_VOTE: result[i] = vote_res[i];
        EX_SHFL: result[i] = shfl_res[i];
        default: result[i] = '0;
      endcase
    end
  end

endmodule
