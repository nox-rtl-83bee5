// rv_asm_pkg: RV32I / Zicsr instruction encoders for the testbenches,
// written from the RISC-V unprivileged and privileged specifications.
package rv_asm_pkg;
  typedef logic [31:0] u32;

  function automatic u32 r_t(input logic [6:0] f7, input int rs2, input int rs1,
                             input logic [2:0] f3, input int rd, input logic [6:0] opc);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic u32 i_t(input int imm, input int rs1, input logic [2:0] f3,
                             input int rd, input logic [6:0] opc);
    return {12'(imm), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic u32 s_t(input int imm, input int rs2, input int rs1, input logic [2:0] f3);
    u32 i = u32'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), f3, i[4:0], 7'b0100011};
  endfunction
  function automatic u32 b_t(input int off, input int rs2, input int rs1, input logic [2:0] f3);
    u32 i = u32'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), f3, i[4:1], i[11], 7'b1100011};
  endfunction

  function automatic u32 lui  (input int rd, input u32 imm20); return {imm20[19:0], 5'(rd), 7'b0110111}; endfunction
  function automatic u32 auipc(input int rd, input u32 imm20); return {imm20[19:0], 5'(rd), 7'b0010111}; endfunction
  function automatic u32 jal  (input int rd, input int off);
    u32 i = u32'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic u32 jalr (input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'b000, rd, 7'b1100111); endfunction

  function automatic u32 beq (input int rs1, input int rs2, input int off); return b_t(off, rs2, rs1, 3'b000); endfunction
  function automatic u32 bne (input int rs1, input int rs2, input int off); return b_t(off, rs2, rs1, 3'b001); endfunction
  function automatic u32 blt (input int rs1, input int rs2, input int off); return b_t(off, rs2, rs1, 3'b100); endfunction
  function automatic u32 bge (input int rs1, input int rs2, input int off); return b_t(off, rs2, rs1, 3'b101); endfunction
  function automatic u32 bltu(input int rs1, input int rs2, input int off); return b_t(off, rs2, rs1, 3'b110); endfunction
  function automatic u32 bgeu(input int rs1, input int rs2, input int off); return b_t(off, rs2, rs1, 3'b111); endfunction

  function automatic u32 lb (input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'b000, rd, 7'b0000011); endfunction
  function automatic u32 lh (input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'b001, rd, 7'b0000011); endfunction
  function automatic u32 lw (input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'b010, rd, 7'b0000011); endfunction
  function automatic u32 lbu(input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'b100, rd, 7'b0000011); endfunction
  function automatic u32 lhu(input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'b101, rd, 7'b0000011); endfunction
  function automatic u32 sb (input int rs2, input int rs1, input int imm); return s_t(imm, rs2, rs1, 3'b000); endfunction
  function automatic u32 sh (input int rs2, input int rs1, input int imm); return s_t(imm, rs2, rs1, 3'b001); endfunction
  function automatic u32 sw (input int rs2, input int rs1, input int imm); return s_t(imm, rs2, rs1, 3'b010); endfunction

  function automatic u32 addi (input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'b000, rd, 7'b0010011); endfunction
  function automatic u32 slti (input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'b010, rd, 7'b0010011); endfunction
  function automatic u32 sltiu(input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'b011, rd, 7'b0010011); endfunction
  function automatic u32 xori (input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'b100, rd, 7'b0010011); endfunction
  function automatic u32 ori  (input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'b110, rd, 7'b0010011); endfunction
  function automatic u32 andi (input int rd, input int rs1, input int imm); return i_t(imm, rs1, 3'b111, rd, 7'b0010011); endfunction
  function automatic u32 slli (input int rd, input int rs1, input int sh); return r_t(7'h00, sh, rs1, 3'b001, rd, 7'b0010011); endfunction
  function automatic u32 srli (input int rd, input int rs1, input int sh); return r_t(7'h00, sh, rs1, 3'b101, rd, 7'b0010011); endfunction
  function automatic u32 srai (input int rd, input int rs1, input int sh); return r_t(7'h20, sh, rs1, 3'b101, rd, 7'b0010011); endfunction

  function automatic u32 add (input int rd, input int rs1, input int rs2); return r_t(7'h00, rs2, rs1, 3'b000, rd, 7'b0110011); endfunction
  function automatic u32 sub (input int rd, input int rs1, input int rs2); return r_t(7'h20, rs2, rs1, 3'b000, rd, 7'b0110011); endfunction
  function automatic u32 sll (input int rd, input int rs1, input int rs2); return r_t(7'h00, rs2, rs1, 3'b001, rd, 7'b0110011); endfunction
  function automatic u32 slt (input int rd, input int rs1, input int rs2); return r_t(7'h00, rs2, rs1, 3'b010, rd, 7'b0110011); endfunction
  function automatic u32 sltu(input int rd, input int rs1, input int rs2); return r_t(7'h00, rs2, rs1, 3'b011, rd, 7'b0110011); endfunction
  function automatic u32 xor_(input int rd, input int rs1, input int rs2); return r_t(7'h00, rs2, rs1, 3'b100, rd, 7'b0110011); endfunction
  function automatic u32 srl (input int rd, input int rs1, input int rs2); return r_t(7'h00, rs2, rs1, 3'b101, rd, 7'b0110011); endfunction
  function automatic u32 sra (input int rd, input int rs1, input int rs2); return r_t(7'h20, rs2, rs1, 3'b101, rd, 7'b0110011); endfunction
  function automatic u32 or_ (input int rd, input int rs1, input int rs2); return r_t(7'h00, rs2, rs1, 3'b110, rd, 7'b0110011); endfunction
  function automatic u32 and_(input int rd, input int rs1, input int rs2); return r_t(7'h00, rs2, rs1, 3'b111, rd, 7'b0110011); endfunction

  function automatic u32 csrrw (input int rd, input int csr, input int rs1); return i_t(csr, rs1, 3'b001, rd, 7'b1110011); endfunction
  function automatic u32 csrrs (input int rd, input int csr, input int rs1); return i_t(csr, rs1, 3'b010, rd, 7'b1110011); endfunction
  function automatic u32 csrrc (input int rd, input int csr, input int rs1); return i_t(csr, rs1, 3'b011, rd, 7'b1110011); endfunction
  function automatic u32 csrrwi(input int rd, input int csr, input int uimm); return i_t(csr, uimm, 3'b101, rd, 7'b1110011); endfunction
  function automatic u32 csrrsi(input int rd, input int csr, input int uimm); return i_t(csr, uimm, 3'b110, rd, 7'b1110011); endfunction
  function automatic u32 csrrci(input int rd, input int csr, input int uimm); return i_t(csr, uimm, 3'b111, rd, 7'b1110011); endfunction

  localparam u32 ECALL  = 32'h0000_0073;
  localparam u32 EBREAK = 32'h0010_0073;
  localparam u32 MRET   = 32'h3020_0073;
  localparam u32 WFI    = 32'h1050_0073;
  localparam u32 NOP    = 32'h0000_0013;
  localparam u32 FENCE  = 32'h0FF0_000F;
endpackage
