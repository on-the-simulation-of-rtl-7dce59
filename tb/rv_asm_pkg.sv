// rv_asm_pkg: a tiny RV32I assembler for the testbenches.
//
// Each function returns the 32-bit machine encoding of one instruction, laid
// out as in the RISC-V unprivileged and privileged specifications. Branch and
// jump offsets are byte offsets relative to the instruction itself. The
// testbenches use it to build the user programs, the operating system trap
// handler and the hypervisor trap handler directly in SystemVerilog.
package rv_asm_pkg;

  // ABI register numbers
  localparam logic [4:0] ZERO = 0, RA = 1, SP = 2, T0 = 5, T1 = 6, T2 = 7,
                         S0 = 8, S1 = 9, A0 = 10, A1 = 11, A2 = 12, A3 = 13,
                         A4 = 14, A5 = 15, A6 = 16, A7 = 17, T3 = 28, T4 = 29;

  function automatic logic [31:0] r_t(input logic [6:0] f7, input logic [4:0] rs2, rs1,
                                      input logic [2:0] f3, input logic [4:0] rd,
                                      input logic [6:0] op);
    return {f7, rs2, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] i_t(input int imm, input logic [4:0] rs1,
                                      input logic [2:0] f3, input logic [4:0] rd,
                                      input logic [6:0] op);
    logic [31:0] v = imm;
    return {v[11:0], rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] s_t(input int imm, input logic [4:0] rs2, rs1,
                                      input logic [2:0] f3);
    logic [31:0] v = imm;
    return {v[11:5], rs2, rs1, f3, v[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_t(input int off, input logic [4:0] rs1, rs2,
                                      input logic [2:0] f3);
    logic [31:0] v = off;
    return {v[12], v[10:5], rs2, rs1, f3, v[4:1], v[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] lui(input logic [4:0] rd, input logic [19:0] imm);
    return {imm, rd, 7'b0110111};
  endfunction
  function automatic logic [31:0] auipc(input logic [4:0] rd, input logic [19:0] imm);
    return {imm, rd, 7'b0010111};
  endfunction
  function automatic logic [31:0] jal(input logic [4:0] rd, input int off);
    logic [31:0] v = off;
    return {v[20], v[10:1], v[11], v[19:12], rd, 7'b1101111};
  endfunction
  function automatic logic [31:0] jalr(input logic [4:0] rd, rs1, input int imm);
    return i_t(imm, rs1, 3'd0, rd, 7'b1100111);
  endfunction
  function automatic logic [31:0] beq (input logic [4:0] a, b, input int off); return b_t(off, a, b, 3'd0); endfunction
  function automatic logic [31:0] bne (input logic [4:0] a, b, input int off); return b_t(off, a, b, 3'd1); endfunction
  function automatic logic [31:0] blt (input logic [4:0] a, b, input int off); return b_t(off, a, b, 3'd4); endfunction
  function automatic logic [31:0] bge (input logic [4:0] a, b, input int off); return b_t(off, a, b, 3'd5); endfunction
  function automatic logic [31:0] bltu(input logic [4:0] a, b, input int off); return b_t(off, a, b, 3'd6); endfunction
  function automatic logic [31:0] bgeu(input logic [4:0] a, b, input int off); return b_t(off, a, b, 3'd7); endfunction

  function automatic logic [31:0] lb (input logic [4:0] rd, rs1, input int imm); return i_t(imm, rs1, 3'd0, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lh (input logic [4:0] rd, rs1, input int imm); return i_t(imm, rs1, 3'd1, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lw (input logic [4:0] rd, rs1, input int imm); return i_t(imm, rs1, 3'd2, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lbu(input logic [4:0] rd, rs1, input int imm); return i_t(imm, rs1, 3'd4, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lhu(input logic [4:0] rd, rs1, input int imm); return i_t(imm, rs1, 3'd5, rd, 7'b0000011); endfunction
  function automatic logic [31:0] sb (input logic [4:0] rs2, rs1, input int imm); return s_t(imm, rs2, rs1, 3'd0); endfunction
  function automatic logic [31:0] sh (input logic [4:0] rs2, rs1, input int imm); return s_t(imm, rs2, rs1, 3'd1); endfunction
  function automatic logic [31:0] sw (input logic [4:0] rs2, rs1, input int imm); return s_t(imm, rs2, rs1, 3'd2); endfunction

  function automatic logic [31:0] addi (input logic [4:0] rd, rs1, input int imm); return i_t(imm, rs1, 3'd0, rd, 7'b0010011); endfunction
  function automatic logic [31:0] slti (input logic [4:0] rd, rs1, input int imm); return i_t(imm, rs1, 3'd2, rd, 7'b0010011); endfunction
  function automatic logic [31:0] sltiu(input logic [4:0] rd, rs1, input int imm); return i_t(imm, rs1, 3'd3, rd, 7'b0010011); endfunction
  function automatic logic [31:0] xori (input logic [4:0] rd, rs1, input int imm); return i_t(imm, rs1, 3'd4, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ori  (input logic [4:0] rd, rs1, input int imm); return i_t(imm, rs1, 3'd6, rd, 7'b0010011); endfunction
  function automatic logic [31:0] andi (input logic [4:0] rd, rs1, input int imm); return i_t(imm, rs1, 3'd7, rd, 7'b0010011); endfunction
  function automatic logic [31:0] slli (input logic [4:0] rd, rs1, input int sh); return i_t(sh, rs1, 3'd1, rd, 7'b0010011); endfunction
  function automatic logic [31:0] srli (input logic [4:0] rd, rs1, input int sh); return i_t(sh, rs1, 3'd5, rd, 7'b0010011); endfunction
  function automatic logic [31:0] srai (input logic [4:0] rd, rs1, input int sh); return i_t(sh | 32'h400, rs1, 3'd5, rd, 7'b0010011); endfunction

  function automatic logic [31:0] add (input logic [4:0] rd, a, b); return r_t(7'h00, b, a, 3'd0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sub (input logic [4:0] rd, a, b); return r_t(7'h20, b, a, 3'd0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sll (input logic [4:0] rd, a, b); return r_t(7'h00, b, a, 3'd1, rd, 7'b0110011); endfunction
  function automatic logic [31:0] slt (input logic [4:0] rd, a, b); return r_t(7'h00, b, a, 3'd2, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sltu(input logic [4:0] rd, a, b); return r_t(7'h00, b, a, 3'd3, rd, 7'b0110011); endfunction
  function automatic logic [31:0] xor_(input logic [4:0] rd, a, b); return r_t(7'h00, b, a, 3'd4, rd, 7'b0110011); endfunction
  function automatic logic [31:0] srl (input logic [4:0] rd, a, b); return r_t(7'h00, b, a, 3'd5, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sra (input logic [4:0] rd, a, b); return r_t(7'h20, b, a, 3'd5, rd, 7'b0110011); endfunction
  function automatic logic [31:0] or_ (input logic [4:0] rd, a, b); return r_t(7'h00, b, a, 3'd6, rd, 7'b0110011); endfunction
  function automatic logic [31:0] and_(input logic [4:0] rd, a, b); return r_t(7'h00, b, a, 3'd7, rd, 7'b0110011); endfunction

  function automatic logic [31:0] csrrw (input logic [4:0] rd, input logic [11:0] c, input logic [4:0] rs1); return {c, rs1, 3'd1, rd, 7'b1110011}; endfunction
  function automatic logic [31:0] csrrs (input logic [4:0] rd, input logic [11:0] c, input logic [4:0] rs1); return {c, rs1, 3'd2, rd, 7'b1110011}; endfunction
  function automatic logic [31:0] csrrc (input logic [4:0] rd, input logic [11:0] c, input logic [4:0] rs1); return {c, rs1, 3'd3, rd, 7'b1110011}; endfunction
  function automatic logic [31:0] csrrwi(input logic [4:0] rd, input logic [11:0] c, input logic [4:0] z);   return {c, z, 3'd5, rd, 7'b1110011}; endfunction
  function automatic logic [31:0] csrrsi(input logic [4:0] rd, input logic [11:0] c, input logic [4:0] z);   return {c, z, 3'd6, rd, 7'b1110011}; endfunction
  function automatic logic [31:0] csrrci(input logic [4:0] rd, input logic [11:0] c, input logic [4:0] z);   return {c, z, 3'd7, rd, 7'b1110011}; endfunction

  function automatic logic [31:0] ecall();  return 32'h0000_0073; endfunction
  function automatic logic [31:0] ebreak(); return 32'h0010_0073; endfunction
  function automatic logic [31:0] sret();   return 32'h1020_0073; endfunction
  function automatic logic [31:0] mret();   return 32'h3020_0073; endfunction
  function automatic logic [31:0] fence();  return 32'h0ff0_000f; endfunction
  function automatic logic [31:0] nop();    return addi(ZERO, ZERO, 0); endfunction

endpackage
