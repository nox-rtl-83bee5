// tb_execute: the execute stage (with its CSR block) driven directly with
// decoded records. Checks ALU results for random operands against a
// reference, forwarding from the writeback port, branch and jump targets
// and link values, load/store hand-over and the LSU back-pressure stall,
// the load stall (lock_wb / wb_fwd_load), CSR instructions, ECALL and
// MRET, an LSU trap, a fetch trap, an interrupt and a WFI wait.
module tb_execute;
  import nox_pkg::*;
  logic clk = 0, rst = 1;
  id_ex_t id_ex_i;
  word_t rs1_data_i, rs2_data_i, lsu_pc_i = '0, fetch_addr_o;
  logic id_valid_i = 0, id_ready_o, lock_wb_i = 0, wb_fwd_load_i = 0, lsu_bp_i = 0, fetch_req_o;
  wb_dec_t wb_dec_i = '0;
  lsu_op_t lsu_op_o;
  trap_t lsu_trap_i = '0, fetch_trap_i = '0;
  ex_mem_wb_t ex_mem_wb_o;
  irq_t irq_i = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  execute dut (.*);

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %08h expected %08h", what, got, exp); end
  endtask

  function automatic id_ex_t rec(input word_t pc, input int rs1, input int rs2, input int rd);
    id_ex_t r;
    r = '0;
    r.pc = pc; r.rs1 = 5'(rs1); r.rs2 = 5'(rs2); r.rd = 5'(rd);
    r.alu = ALU_ADD; r.opa = OPA_RS1; r.opb = OPB_RS2; r.jmp = JMP_NONE; r.lsu = LSU_NONE;
    r.size = SZ_WORD; r.csr = CSR_NONE; r.sys = SYS_NONE;
    return r;
  endfunction

  function automatic word_t ref_alu(input alu_op_t op, input word_t a, input word_t b);
    case (op)
      ALU_ADD:  return a + b;
      ALU_SUB:  return a - b;
      ALU_SLL:  return a << b[4:0];
      ALU_SLT:  return ($signed(a) < $signed(b)) ? 1 : 0;
      ALU_SLTU: return (a < b) ? 1 : 0;
      ALU_XOR:  return a ^ b;
      ALU_SRL:  return a >> b[4:0];
      ALU_SRA:  return word_t'($signed(a) >>> b[4:0]);
      ALU_OR:   return a | b;
      default:  return a & b;
    endcase
  endfunction

  // present a record for one cycle; comparisons of combinational outputs
  // happen in the caller before the edge
  task automatic present(input id_ex_t r, input word_t a, input word_t b);
    @(negedge clk);
    id_ex_i = r; rs1_data_i = a; rs2_data_i = b; id_valid_i = 1;
    #1;
  endtask
  task automatic finish_cycle();
    @(negedge clk);
    id_valid_i = 0;
  endtask

  // run a CSR instruction and return the old value
  task automatic csr_op(input csr_cmd_t c, input logic [11:0] a, input word_t d, output word_t old);
    id_ex_t r;
    r = rec(32'h10, 1, 0, 9); r.we_rd = 1; r.csr = c; r.csr_addr = a;
    present(r, d, 0);
    finish_cycle();
    old = ex_mem_wb_o.data;
  endtask

  initial begin
    id_ex_t r;
    word_t a, b, old;
    id_ex_i = '0; rs1_data_i = '0; rs2_data_i = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    // ALU
    for (int i = 0; i < 400; i++) begin
      r = rec(32'h100, 1, 2, 3); r.we_rd = 1;
      r.alu = alu_op_t'($urandom_range(0, 9));
      r.opb = opb_t'($urandom_range(0, 1));
      r.imm = $urandom;
      a = $urandom; b = (i % 5 == 0) ? a : $urandom;
      present(r, a, b);
      check("ready", id_ready_o, 1'b1);
      check("no redirect", fetch_req_o, 1'b0);
      finish_cycle();
      check("alu we", ex_mem_wb_o.we, 1'b1);
      check("alu rd", ex_mem_wb_o.rd, 3);
      check("alu", ex_mem_wb_o.data, ref_alu(r.alu, a, r.opb == OPB_IMM ? r.imm : b));
    end
    // LUI / AUIPC
    r = rec(32'h200, 0, 0, 4); r.we_rd = 1; r.opa = OPA_ZERO; r.opb = OPB_IMM; r.imm = 32'hABCD_E000;
    present(r, 32'h1111, 0); finish_cycle(); check("lui", ex_mem_wb_o.data, 32'hABCD_E000);
    r.opa = OPA_PC; present(r, 32'h1111, 0); finish_cycle(); check("auipc", ex_mem_wb_o.data, 32'hABCD_E200);
    // forwarding from writeback
    r = rec(32'h300, 7, 8, 9); r.we_rd = 1;
    wb_dec_i = '{we: 1'b1, rd_addr: 5'd8, rd_data: 32'h100};
    present(r, 32'h5, 32'h999); finish_cycle(); wb_dec_i = '0;
    check("forward rs2", ex_mem_wb_o.data, 32'h105);
    wb_dec_i = '{we: 1'b1, rd_addr: 5'd0, rd_data: 32'h100};
    r = rec(32'h300, 0, 8, 9); r.we_rd = 1;
    present(r, 32'h0, 32'h1); finish_cycle(); wb_dec_i = '0;
    check("no forward to x0", ex_mem_wb_o.data, 32'h1);
    // branches
    for (int i = 0; i < 200; i++) begin
      logic tk;
      logic [2:0] f3;
      f3 = 3'($urandom_range(0, 5)); f3 = (f3 < 2) ? f3 : f3 + 2;
      r = rec(32'h1000, 1, 2, 0); r.jmp = JMP_BRANCH; r.funct3 = f3; r.imm = {$urandom_range(0, 255), 2'b00} - 32'd512;
      a = $urandom; b = (i % 4 == 0) ? a : $urandom;
      case (f3)
        3'b000: tk = (a == b);
        3'b001: tk = (a != b);
        3'b100: tk = ($signed(a) < $signed(b));
        3'b101: tk = ($signed(a) >= $signed(b));
        3'b110: tk = (a < b);
        default: tk = (a >= b);
      endcase
      present(r, a, b);
      check("branch taken", fetch_req_o, tk);
      if (tk) check("branch target", fetch_addr_o, 32'h1000 + r.imm);
      finish_cycle();
      check("branch no write", ex_mem_wb_o.we, 1'b0);
    end
    r = rec(32'h2000, 1, 0, 1); r.we_rd = 1; r.jmp = JMP_JALR; r.imm = 32'd9;
    present(r, 32'h3000, 0);
    check("jalr redirect", fetch_req_o, 1'b1);
    check("jalr target (bit 0 cleared)", fetch_addr_o, 32'h3008);
    finish_cycle();
    check("jalr link", ex_mem_wb_o.data, 32'h2004);
    // misaligned jump target -> trap to mtvec (reset value 0)
    r.imm = 32'd6;
    present(r, 32'h3000, 0);
    check("misaligned target trap", dut.trap, 1'b1);
    check("to mtvec", fetch_addr_o, 32'h0);
    finish_cycle();
    check("no link on trap", ex_mem_wb_o.we, 1'b0);
    // load / store hand-over and LSU back-pressure
    r = rec(32'h400, 3, 4, 5); r.we_rd = 1; r.lsu = LSU_LOAD; r.size = SZ_HALF; r.imm = 32'hFFFF_FFFC;
    lsu_bp_i = 1;
    present(r, 32'h1000, 0);
    check("stall on lsu_bp", id_ready_o, 1'b0);
    check("nothing issued", lsu_op_o.valid, 1'b0);
    lsu_bp_i = 0;
    #1;
    check("issue", lsu_op_o.valid, 1'b1);
    check("addr", lsu_op_o.addr, 32'h0FFC);
    check("rd", lsu_op_o.rd, 5);
    check("pc", lsu_op_o.pc, 32'h400);
    finish_cycle();
    check("load not written by execute", ex_mem_wb_o.we, 1'b0);
    // load stall
    lock_wb_i = 1;
    r = rec(32'h404, 5, 0, 6); r.we_rd = 1; r.opb = OPB_IMM; r.imm = 1;
    present(r, 32'h0, 0);
    check("stall on lock_wb", id_ready_o, 1'b0);
    wb_fwd_load_i = 1; wb_dec_i = '{we: 1'b1, rd_addr: 5'd5, rd_data: 32'h77};
    #1 check("go with wb_fwd_load", id_ready_o, 1'b1);
    finish_cycle(); lock_wb_i = 0; wb_fwd_load_i = 0; wb_dec_i = '0;
    check("load forwarded", ex_mem_wb_o.data, 32'h78);
    // CSRs: mtvec, mscratch
    csr_op(CSR_RW, CSR_MTVEC, 32'h0000_0800, old);
    csr_op(CSR_RW, CSR_MSCRATCH, 32'h1234, old);
    csr_op(CSR_RS, CSR_MSCRATCH, 32'h0, old);
    check("csr read", old, 32'h1234);
    // ECALL
    r = rec(32'h500, 0, 0, 0); r.sys = SYS_ECALL;
    present(r, 0, 0);
    check("ecall redirect", fetch_req_o, 1'b1);
    check("ecall vector", fetch_addr_o, 32'h800);
    finish_cycle();
    csr_op(CSR_RS, CSR_MEPC, 0, old);   check("ecall mepc", old, 32'h500);
    csr_op(CSR_RS, CSR_MCAUSE, 0, old); check("ecall mcause", old, CAUSE_ECALL_M);
    // MRET
    r = rec(32'h804, 0, 0, 0); r.sys = SYS_MRET;
    present(r, 0, 0);
    check("mret redirect", fetch_req_o, 1'b1);
    check("mret target", fetch_addr_o, 32'h500);
    finish_cycle();
    // LSU trap overrides the held instruction
    r = rec(32'h600, 1, 2, 3); r.we_rd = 1;
    present(r, 1, 2);
    lsu_trap_i = '{active: 1'b1, cause: CAUSE_STORE_FAULT, mtval: 32'hBAD0};
    lsu_pc_i = 32'h5F0;
    #1 check("lsu trap redirect", fetch_addr_o, 32'h800);
    finish_cycle(); lsu_trap_i = '0;
    check("killed instruction", ex_mem_wb_o.we, 1'b0);
    csr_op(CSR_RS, CSR_MEPC, 0, old);  check("lsu trap mepc", old, 32'h5F0);
    csr_op(CSR_RS, CSR_MTVAL, 0, old); check("lsu trap mtval", old, 32'hBAD0);
    // fetch trap, taken with nothing in decode
    @(negedge clk);
    fetch_trap_i = '{active: 1'b1, cause: CAUSE_IACCESS_FAULT, mtval: 32'h9000};
    #1 check("fetch trap redirect", fetch_req_o, 1'b1);
    @(negedge clk); fetch_trap_i = '0;
    csr_op(CSR_RS, CSR_MCAUSE, 0, old); check("fetch trap mcause", old, CAUSE_IACCESS_FAULT);
    csr_op(CSR_RS, CSR_MEPC, 0, old);   check("fetch trap mepc", old, 32'h9000);
    // WFI waits for an enabled interrupt, then the interrupt is taken
    csr_op(CSR_RW, CSR_MIE, 32'h80, old);
    csr_op(CSR_RS, CSR_MSTATUS, 32'h8, old);
    r = rec(32'h700, 0, 0, 0); r.sys = SYS_WFI;
    present(r, 0, 0);
    check("wfi waits", id_ready_o, 1'b0);
    repeat (3) @(negedge clk);
    check("still waiting", id_ready_o, 1'b0);
    irq_i.tmr = 1;
    #1 check("interrupt taken", fetch_req_o, 1'b1);
    finish_cycle(); irq_i = '0;
    csr_op(CSR_RS, CSR_MCAUSE, 0, old); check("irq mcause", old, CAUSE_IRQ_TMR);
    csr_op(CSR_RS, CSR_MEPC, 0, old);   check("irq mepc after wfi", old, 32'h704);
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
