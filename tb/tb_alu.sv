// tb_alu: integer operations, thread-identity CSRs and the vote/shuffle path.
//
// Random operands are applied for every integer operation, with register and
// immediate operand b, and compared with SystemVerilog arithmetic. CSR reads
// are checked for a group starting at hardware thread 8 of size 8. A vote
// and a shuffle check that the ALU returns the cross-lane results.
module tb_alu;
  import wlf_pkg::*;
  localparam int L = 32;
  dec_t               dec;
  logic [5:0]         gsize;
  logic [4:0]         group_base;
  logic [L-1:0]       lane_act;
  logic [L-1:0][31:0] opa, opb, opc, result;
  int checks = 0, failures = 0;

  alu #(.LANES(L)) dut (.*);

  function automatic logic [31:0] ref_op(alu_op_e op, logic [31:0] a, logic [31:0] b);
    case (op)
      ALU_ADD:  return a + b;
      ALU_SUB:  return a - b;
      ALU_SLL:  return a << b[4:0];
      ALU_SLT:  return ($signed(a) < $signed(b)) ? 1 : 0;
      ALU_SLTU: return (a < b) ? 1 : 0;
      ALU_XOR:  return a ^ b;
      ALU_SRL:  return a >> b[4:0];
      ALU_SRA:  return $signed(a) >>> b[4:0];
      ALU_OR:   return a | b;
      ALU_AND:  return a & b;
      default:  return b;
    endcase
  endfunction

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dec = '0; gsize = 32; group_base = 0; lane_act = '1;
    for (int it = 0; it < 300; it++) begin
      alu_op_e op;
      op = alu_op_e'($urandom % 11);
      dec = '0; dec.unit = EX_ALU; dec.alu_op = op; dec.use_imm = $urandom % 2;
      dec.imm = $urandom;
      for (int i = 0; i < L; i++) begin opa[i] = $urandom; opb[i] = $urandom; opc[i] = 0; end
      #1;
      for (int i = 0; i < L; i++)
        chk($sformatf("op %s lane %0d", op.name(), i), result[i], ref_op(op, opa[i], dec.use_imm ? dec.imm : opb[i]));
    end
    // CSRs: group of 8 threads starting at hardware thread 8 (slice 2).
    dec = '0; dec.unit = EX_CSR; gsize = 8; group_base = 8;
    dec.csr = CSR_THREAD_ID;  #1; for (int i = 0; i < 8; i++) chk("tid", result[i], i);
    dec.csr = CSR_GROUP_ID;   #1; chk("gid", result[3], 1);
    dec.csr = CSR_GTHREAD_ID; #1; for (int i = 0; i < 8; i++) chk("gtid", result[i], 8 + i);
    dec.csr = CSR_GROUP_SIZE; #1; chk("gsize", result[0], 8);
    // Vote ballot in a group of 8, all members.
    dec = '0; dec.unit = EX_VOTE; dec.mode = VOTE_BALLOT; gsize = 8;
    for (int i = 0; i < L; i++) begin opa[i] = (i % 3 == 0) ? 1 : 0; opc[i] = 32'hFF; end
    #1; chk("ballot", result[5], 32'b01001001);
    chk("ballot outside", result[9], 0);
    // Shuffle xor 1 in a group of 4.
    dec = '0; dec.unit = EX_SHFL; dec.mode = SHFL_BFLY; dec.lane_off = 1; gsize = 4;
    for (int i = 0; i < L; i++) begin opa[i] = 50 + i; opc[i] = 0; end
    #1; for (int i = 0; i < 4; i++) chk("bfly", result[i], 50 + (i ^ 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
