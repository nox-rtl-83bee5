// tb_decode: decode stage with its register file. Fills the registers
// through the write port, then decodes one instruction of every format and
// class and compares the decoded record (destination, immediate, ALU
// operation, operand selects, jump, load/store, CSR and system fields) and
// the two operands with values written out by hand from the RISC-V
// encoding tables. Also checks: the same-cycle write-through, the refresh
// of held operands while execute stalls, illegal encodings, the
// fetch_ready handshake, and the flush on fetch_req.
module tb_decode;
  import nox_pkg::*;
  import rv_asm_pkg::*;
  logic clk = 0, rst = 1, fetch_valid_i = 0, fetch_req_i = 0, id_ready_i = 1;
  logic fetch_ready_o, id_valid_o;
  fetch_instr_t fetch_instr_i;
  wb_dec_t wb_dec_i;
  id_ex_t id_ex_o;
  word_t rs1_data_o, rs2_data_o;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  decode dut (.*);

  function automatic word_t rv(input int i);
    return (i == 0) ? 32'd0 : 32'h0100_0193 * i;
  endfunction

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %08h expected %08h", what, got, exp); end
  endtask

  // Present one instruction, let decode take it, return after the edge.
  task automatic issue(input u32 ins, input word_t pc);
    @(negedge clk);
    fetch_valid_i = 1; fetch_instr_i = '{pc: pc, instr: ins};
    #1 check("fetch_ready", fetch_ready_o, 1'b1);
    @(negedge clk);
    fetch_valid_i = 0;
  endtask

  typedef struct {
    string name; u32 ins; logic we; word_t imm; alu_op_t alu; opa_t opa; opb_t opb;
    jmp_t jmp; lsu_type_t lsu; lsu_size_t size; csr_cmd_t csr; sys_t sys; int rs1; int rs2; int rd;
  } exp_t;

  exp_t tests [$];

  initial begin
    wb_dec_i = '0; fetch_instr_i = '0;
    tests.push_back('{"add",   add(3, 1, 2),       1, 32'd0, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_NONE, 1, 2, 3});
    tests.push_back('{"sub",   sub(4, 5, 6),       1, 32'd0, ALU_SUB, OPA_RS1, OPB_RS2, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_NONE, 5, 6, 4});
    tests.push_back('{"sra",   sra(7, 8, 9),       1, 32'd0, ALU_SRA, OPA_RS1, OPB_RS2, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_NONE, 8, 9, 7});
    tests.push_back('{"sltu",  sltu(7, 8, 9),      1, 32'd0, ALU_SLTU, OPA_RS1, OPB_RS2, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_NONE, 8, 9, 7});
    tests.push_back('{"addi",  addi(10, 11, -3),   1, 32'hFFFF_FFFD, ALU_ADD, OPA_RS1, OPB_IMM, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_NONE, 11, -1, 10});
    tests.push_back('{"andi",  andi(10, 11, 'h7f0), 1, 32'h0000_07F0, ALU_AND, OPA_RS1, OPB_IMM, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_NONE, 11, -1, 10});
    tests.push_back('{"srai",  srai(12, 13, 7),    1, 32'h0000_0407, ALU_SRA, OPA_RS1, OPB_IMM, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_NONE, 13, -1, 12});
    tests.push_back('{"lui",   lui(14, 32'hABCDE), 1, 32'hABCD_E000, ALU_ADD, OPA_ZERO, OPB_IMM, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_NONE, -1, -1, 14});
    tests.push_back('{"auipc", auipc(15, 32'h00012), 1, 32'h0001_2000, ALU_ADD, OPA_PC, OPB_IMM, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_NONE, -1, -1, 15});
    tests.push_back('{"jal",   jal(1, -2048),      1, 32'hFFFF_F800, ALU_ADD, OPA_RS1, OPB_RS2, JMP_JAL, LSU_NONE, SZ_WORD, CSR_NONE, SYS_NONE, -1, -1, 1});
    tests.push_back('{"jalr",  jalr(1, 16, 20),    1, 32'd20, ALU_ADD, OPA_RS1, OPB_RS2, JMP_JALR, LSU_NONE, SZ_WORD, CSR_NONE, SYS_NONE, 16, -1, 1});
    tests.push_back('{"bge",   bge(17, 18, -12),   0, 32'hFFFF_FFF4, ALU_ADD, OPA_RS1, OPB_RS2, JMP_BRANCH, LSU_NONE, SZ_WORD, CSR_NONE, SYS_NONE, 17, 18, -1});
    tests.push_back('{"bltu",  bltu(17, 18, 4094), 0, 32'd4094, ALU_ADD, OPA_RS1, OPB_RS2, JMP_BRANCH, LSU_NONE, SZ_WORD, CSR_NONE, SYS_NONE, 17, 18, -1});
    tests.push_back('{"lh",    lh(19, 20, -2),     1, 32'hFFFF_FFFE, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_LOAD, SZ_HALF, CSR_NONE, SYS_NONE, 20, -1, 19});
    tests.push_back('{"lbu",   lbu(19, 20, 5),     1, 32'd5, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_LOAD, SZ_BYTE, CSR_NONE, SYS_NONE, 20, -1, 19});
    tests.push_back('{"sw",    sw(21, 22, -100),   0, 32'hFFFF_FF9C, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_STORE, SZ_WORD, CSR_NONE, SYS_NONE, 22, 21, -1});
    tests.push_back('{"sb",    sb(21, 22, 1023),   0, 32'd1023, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_STORE, SZ_BYTE, CSR_NONE, SYS_NONE, 22, 21, -1});
    tests.push_back('{"csrrs", csrrs(23, 'h300, 24), 1, 32'd0, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_NONE, SZ_WORD, CSR_RS, SYS_NONE, 24, -1, 23});
    tests.push_back('{"csrrci", csrrci(23, 'h341, 9), 1, 32'd0, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_NONE, SZ_WORD, CSR_RC, SYS_NONE, -1, -1, 23});
    tests.push_back('{"ecall", ECALL,  0, 32'd0, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_ECALL,  -1, -1, -1});
    tests.push_back('{"ebreak", EBREAK, 0, 32'd0, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_EBREAK, -1, -1, -1});
    tests.push_back('{"mret",  MRET,   0, 32'd0, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_MRET,   -1, -1, -1});
    tests.push_back('{"wfi",   WFI,    0, 32'd0, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_WFI,    -1, -1, -1});
    tests.push_back('{"fence", FENCE,  0, 32'd0, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_NONE,   -1, -1, -1});
    tests.push_back('{"ill-ones", 32'hFFFF_FFFF, 0, 32'd0, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_ILLEGAL, -1, -1, -1});
    tests.push_back('{"ill-sub-funct7", r_t(7'h01, 2, 1, 3'b000, 3, 7'b0110011), 0, 32'd0, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_ILLEGAL, -1, -1, -1});
    tests.push_back('{"ill-load-f3", i_t(0, 1, 3'b011, 2, 7'b0000011), 0, 32'd0, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_ILLEGAL, -1, -1, -1});
    tests.push_back('{"ill-branch-f3", b_t(8, 1, 2, 3'b010), 0, 32'd0, ALU_ADD, OPA_RS1, OPB_RS2, JMP_NONE, LSU_NONE, SZ_WORD, CSR_NONE, SYS_ILLEGAL, -1, -1, -1});

    repeat (2) @(negedge clk);
    rst = 0;
    // fill the register file
    for (int i = 1; i < 32; i++) begin
      @(negedge clk);
      wb_dec_i = '{we: 1'b1, rd_addr: 5'(i), rd_data: rv(i)};
    end
    @(negedge clk);
    wb_dec_i = '0;

    foreach (tests[k]) begin
      exp_t t;
      t = tests[k];
      issue(t.ins, 32'h1000 + 4 * k);
      check({t.name, " valid"}, id_valid_o, 1'b1);
      check({t.name, " pc"}, id_ex_o.pc, 32'h1000 + 4 * k);
      check({t.name, " we"}, id_ex_o.we_rd, t.we);
      check({t.name, " sys"}, id_ex_o.sys, t.sys);
      if (t.sys == SYS_ILLEGAL) continue;
      check({t.name, " imm"}, id_ex_o.imm, t.imm);
      if (t.we) check({t.name, " rd"}, id_ex_o.rd, t.rd);
      check({t.name, " jmp"}, id_ex_o.jmp, t.jmp);
      check({t.name, " lsu"}, id_ex_o.lsu, t.lsu);
      check({t.name, " csr"}, id_ex_o.csr, t.csr);
      if (t.lsu != LSU_NONE) check({t.name, " size"}, id_ex_o.size, t.size);
      if (t.lsu == LSU_NONE && t.jmp == JMP_NONE && t.csr == CSR_NONE && t.sys == SYS_NONE) begin
        check({t.name, " alu"}, id_ex_o.alu, t.alu);
        check({t.name, " opa"}, id_ex_o.opa, t.opa);
        check({t.name, " opb"}, id_ex_o.opb, t.opb);
      end
      if (t.rs1 >= 0) check({t.name, " rs1 data"}, rs1_data_o, rv(t.rs1));
      if (t.rs2 >= 0) check({t.name, " rs2 data"}, rs2_data_o, rv(t.rs2));
    end

    // write-through: x5 written in the cycle the reader is decoded
    @(negedge clk);
    fetch_valid_i = 1; fetch_instr_i = '{pc: 32'h2000, instr: add(1, 5, 6)};
    wb_dec_i = '{we: 1'b1, rd_addr: 5'd5, rd_data: 32'hCAFE_0005};
    @(negedge clk);
    fetch_valid_i = 0; wb_dec_i = '0;
    check("write-through rs1", rs1_data_o, 32'hCAFE_0005);
    check("write-through rs2", rs2_data_o, rv(6));

    // held instruction refreshed by a later write
    id_ready_i = 0;
    @(negedge clk);
    fetch_valid_i = 1; fetch_instr_i = '{pc: 32'h2004, instr: add(1, 7, 7)};
    #1 check("not ready while held", fetch_ready_o, 1'b0);
    wb_dec_i = '{we: 1'b1, rd_addr: 5'd6, rd_data: 32'hBEEF_0006};
    @(negedge clk);
    wb_dec_i = '0;
    check("held pc", id_ex_o.pc, 32'h2000);
    check("held refresh rs2", rs2_data_o, 32'hBEEF_0006);
    check("held rs1 unchanged", rs1_data_o, 32'hCAFE_0005);
    id_ready_i = 1;
    @(negedge clk);
    fetch_valid_i = 0;
    check("next taken after release", id_ex_o.pc, 32'h2004);
    // flush
    fetch_req_i = 1;
    @(negedge clk);
    fetch_req_i = 0;
    check("flush clears valid", id_valid_o, 1'b0);
    // x0 stays zero
    @(negedge clk);
    wb_dec_i = '{we: 1'b1, rd_addr: 5'd0, rd_data: 32'hFFFF_FFFF};
    @(negedge clk);
    wb_dec_i = '0;
    issue(add(1, 0, 0), 32'h3000);
    check("x0", rs1_data_o, 32'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
