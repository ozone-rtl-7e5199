// ozone_toy_isa_pkg: encoding of the small test instruction set used by the
// behavioural core in the end-to-end and workload testbenches.
//
// A 64-bit instruction: [63:56] opcode, [55:52] rd, [51:48] rs1, [47:44] rs2,
// [31:0] immediate. Every instruction has a fixed latency in the behavioural
// core: 2 cycles (fetch, execute), 3 for loads and stores, and 2 more for a
// branch whose always-taken prediction was wrong.
package ozone_toy_isa_pkg;
  typedef enum logic [7:0] {
    OP_NOP  = 8'd0,
    OP_LI   = 8'd1,   // rd = zero-extended imm
    OP_ADD  = 8'd2,   // rd = rs1 + rs2
    OP_XOR  = 8'd3,   // rd = rs1 ^ rs2
    OP_SEQ  = 8'd4,   // rd = (rs1 == rs2)
    OP_CMOV = 8'd5,   // if (rs1 != 0) rd = rs2
    OP_ADDI = 8'd6,   // rd = rs1 + sign-extended imm
    OP_LD   = 8'd7,   // rd = mem[rs1 + imm]
    OP_ST   = 8'd8,   // mem[rs1 + imm] = rs2
    OP_BNE  = 8'd9,   // if (rs1 != rs2) pc += imm
    OP_SHLI = 8'd10,  // rd = rs1 << imm[5:0]
    OP_SHRI = 8'd11,  // rd = rs1 >> imm[5:0]
    OP_ANDI = 8'd12,  // rd = rs1 & zero-extended imm
    OP_SLTU = 8'd13,  // rd = (rs1 < rs2), unsigned
    OP_AND  = 8'd14,  // rd = rs1 & rs2
    OP_HALT = 8'd15,  // end of the Ozone code
    OP_SUB  = 8'd16,  // rd = rs1 - rs2
    OP_MUL  = 8'd17,  // rd = low 64 bits of rs1 * rs2
    OP_MULHU = 8'd18  // rd = high 64 bits of rs1 * rs2, unsigned
  } op_e;

  function automatic logic [63:0] enc(input op_e op, input int rd, input int rs1,
                                      input int rs2, input int imm);
    return {op, 4'(rd), 4'(rs1), 4'(rs2), 12'd0, 32'(imm)};
  endfunction
endpackage
