// execute: the execute stage of NoX, with the CSR block.
// For the instruction held by decode (id_valid / id_ready) it
//  * forwards operands: a source register written by writeback in this
//    cycle (wb_dec_i) is taken from there instead of from decode;
//  * computes the ALU result of the RV32I register-register and immediate
//    operations, LUI, AUIPC and the link address of JAL/JALR;
//  * resolves branches and jumps: a taken one raises fetch_req_o with
//    fetch_addr_o for one cycle, which flushes decode and the fetch FIFO
//    (no prediction: three bubbles with a one-cycle instruction bus);
//  * runs the six Zicsr instructions through the csr block;
//  * sends loads and stores to the LSU (lsu_op_o, address rs1 + imm);
//  * takes traps and interrupts: it writes mepc/mcause/mtval and redirects
//    fetching to the handler; MRET returns to mepc;
//  * registers the result to write back (ex_mem_wb_o).
// Stalls: a load or store waits while the LSU is busy (lsu_bp_i); every
// instruction waits while a load is outstanding (lock_wb_i) until the cycle
// its data is on wb_dec (wb_fwd_load_i), from where it is forwarded; WFI
// waits until an enabled interrupt is pending; an instruction that traps
// waits until the LSU is idle, so a late bus error cannot overwrite mepc.
// Trap order: an LSU trap (lsu_trap_i, with the faulting pc on lsu_pc_i)
// first, whatever execute holds; then an interrupt, taken instead of the
// instruction held (after a WFI: mepc is the next instruction) when the LSU
// is idle; then a fetch access fault (fetch_trap_i), taken when decode is
// empty so that every older instruction has completed; then the held
// instruction's own traps (illegal, ECALL, EBREAK, misaligned jump target).
// The stage's duties and the names of its signals follow the paper; the
// stall and trap-ordering rules are this design's own.
`include "nox_defines.svh"

module execute
  import nox_pkg::*;
#(
  parameter word_t HART_ID     = 32'd0,
  parameter word_t MTVEC_RESET = 32'h0000_0000
) (
  input  logic       clk,
  input  logic       rst,
  input  id_ex_t     id_ex_i,
  input  word_t      rs1_data_i,
  input  word_t      rs2_data_i,
  input  logic       id_valid_i,
  output logic       id_ready_o,
  input  wb_dec_t    wb_dec_i,
  input  logic       lock_wb_i,
  input  logic       wb_fwd_load_i,
  output lsu_op_t    lsu_op_o,
  input  logic       lsu_bp_i,
  input  word_t      lsu_pc_i,
  input  trap_t      lsu_trap_i,
  output ex_mem_wb_t ex_mem_wb_o,
  output logic       fetch_req_o,
  output word_t      fetch_addr_o,
  input  trap_t      fetch_trap_i,
  input  irq_t       irq_i
);
  word_t op1, op2, alu_a, alu_b, alu_res, target, result;
  logic  br_cond, taken, misaligned_tgt;
  logic  load_stall, mem_stall, wfi_wait, sync_trap, stall;
  logic  take_lsu_trap, take_irq, take_fetch_trap, commit, trap;
  word_t trap_cause, trap_pc, trap_val, trap_vector, mepc;
  word_t csr_rdata, irq_cause;
  logic  csr_illegal, csr_write, irq_pending, irq_take;
  logic  mret, retire;

  function automatic logic hits(input wb_dec_t w, input logic [4:0] r);
    return w.we && (w.rd_addr == r) && (r != 5'd0);
  endfunction

  // ----------------------------------------------------------- operands
  assign op1 = hits(wb_dec_i, id_ex_i.rs1) ? wb_dec_i.rd_data : rs1_data_i;
  assign op2 = hits(wb_dec_i, id_ex_i.rs2) ? wb_dec_i.rd_data : rs2_data_i;

  always_comb begin
    unique case (id_ex_i.opa)
      OPA_PC:   alu_a = id_ex_i.pc;
      OPA_ZERO: alu_a = '0;
      default:  alu_a = op1;
    endcase
    alu_b = (id_ex_i.opb == OPB_IMM) ? id_ex_i.imm : op2;
  end

  // ---------------------------------------------------------------- ALU
  always_comb begin
    unique case (id_ex_i.alu)
      ALU_SUB:  alu_res = alu_a - alu_b;
      ALU_SLL:  alu_res = alu_a << alu_b[4:0];
      ALU_SLT:  alu_res = {31'd0, $signed(alu_a) < $signed(alu_b)};
      ALU_SLTU: alu_res = {31'd0, alu_a < alu_b};
      ALU_XOR:  alu_res = alu_a ^ alu_b;
      ALU_SRL:  alu_res = alu_a >> alu_b[4:0];
      ALU_SRA:  alu_res = word_t'($signed(alu_a) >>> alu_b[4:0]);
      ALU_OR:   alu_res = alu_a | alu_b;
      ALU_AND:  alu_res = alu_a & alu_b;
      default:  alu_res = alu_a + alu_b;
    endcase
  end

  // ------------------------------------------------------------ branches
  always_comb begin
    unique case (id_ex_i.funct3)
      3'b000:  br_cond = (op1 == op2);
      3'b001:  br_cond = (op1 != op2);
      3'b100:  br_cond = ($signed(op1) <  $signed(op2));
      3'b101:  br_cond = ($signed(op1) >= $signed(op2));
      3'b110:  br_cond = (op1 <  op2);
      default: br_cond = (op1 >= op2);
    endcase
    unique case (id_ex_i.jmp)
      JMP_JAL:    begin taken = 1'b1;    target = id_ex_i.pc + id_ex_i.imm; end
      JMP_JALR:   begin taken = 1'b1;    target = (op1 + id_ex_i.imm) & ~32'd1; end
      JMP_BRANCH: begin taken = br_cond; target = id_ex_i.pc + id_ex_i.imm; end
      default:    begin taken = 1'b0;    target = id_ex_i.pc + 32'd4; end
    endcase
    misaligned_tgt = taken && (target[1:0] != 2'b00);
  end

  // ------------------------------------------------------------- CSR block
  assign csr_write = (id_ex_i.csr == CSR_RW) || (id_ex_i.rs1 != 5'd0);

  csr #(.HART_ID(HART_ID), .MTVEC_RESET(MTVEC_RESET)) u_csr (
    .clk           (clk),
    .rst           (rst),
    .csr_valid_i   (retire && id_ex_i.csr != CSR_NONE),
    .csr_cmd_i     (id_ex_i.csr),
    .csr_write_i   (csr_write),
    .csr_addr_i    (id_ex_i.csr_addr),
    .csr_wdata_i   (id_ex_i.csr_imm ? {27'd0, id_ex_i.rs1} : op1),
    .csr_rdata_o   (csr_rdata),
    .csr_illegal_o (csr_illegal),
    .irq_i         (irq_i),
    .trap_i        (trap),
    .trap_cause_i  (trap_cause),
    .trap_pc_i     (trap_pc),
    .trap_val_i    (trap_val),
    .trap_vector_o (trap_vector),
    .mret_i        (mret),
    .retire_i      (retire),
    .mepc_o        (mepc),
    .irq_pending_o (irq_pending),
    .irq_take_o    (irq_take),
    .irq_cause_o   (irq_cause)
  );

  // -------------------------------------------------------------- control
  assign sync_trap  = (id_ex_i.sys inside {SYS_ILLEGAL, SYS_ECALL, SYS_EBREAK}) ||
                      (id_ex_i.csr != CSR_NONE && csr_illegal) || misaligned_tgt;
  assign load_stall = lock_wb_i && !wb_fwd_load_i;
  assign mem_stall  = (id_ex_i.lsu != LSU_NONE) && lsu_bp_i;
  assign wfi_wait   = (id_ex_i.sys == SYS_WFI) && !irq_pending;
  assign stall      = load_stall || mem_stall || wfi_wait || (sync_trap && lsu_bp_i);

  assign take_lsu_trap   = lsu_trap_i.active;
  assign take_irq        = !take_lsu_trap && id_valid_i && irq_take && !lsu_bp_i;
  assign take_fetch_trap = !take_lsu_trap && !id_valid_i && fetch_trap_i.active;
  assign commit          = !take_lsu_trap && !take_irq && id_valid_i && !stall;

  always_comb begin
    trap       = 1'b0;
    trap_cause = '0;
    trap_pc    = id_ex_i.pc;
    trap_val   = '0;
    if (take_lsu_trap) begin
      trap       = 1'b1;
      trap_cause = lsu_trap_i.cause;
      trap_pc    = lsu_pc_i;
      trap_val   = lsu_trap_i.mtval;
    end else if (take_irq) begin
      trap       = 1'b1;
      trap_cause = irq_cause;
      trap_pc    = (id_ex_i.sys == SYS_WFI) ? id_ex_i.pc + 32'd4 : id_ex_i.pc;
    end else if (take_fetch_trap) begin
      trap       = 1'b1;
      trap_cause = fetch_trap_i.cause;
      trap_pc    = fetch_trap_i.mtval;
      trap_val   = fetch_trap_i.mtval;
    end else if (commit && sync_trap) begin
      trap = 1'b1;
      if (id_ex_i.sys == SYS_ECALL) begin
        trap_cause = CAUSE_ECALL_M;
      end else if (id_ex_i.sys == SYS_EBREAK) begin
        trap_cause = CAUSE_BREAKPOINT;
        trap_val   = id_ex_i.pc;
      end else if (id_ex_i.sys == SYS_ILLEGAL || id_ex_i.csr != CSR_NONE) begin
        trap_cause = CAUSE_ILLEGAL_INSTR;
        trap_val   = id_ex_i.instr;
      end else begin
        trap_cause = CAUSE_IADDR_MISALIGNED;
        trap_val   = target;
      end
    end
  end

  assign mret       = retire && (id_ex_i.sys == SYS_MRET);
  assign retire     = commit && !sync_trap;
  assign id_ready_o = !stall;

  always_comb begin
    fetch_req_o  = 1'b0;
    fetch_addr_o = target;
    if (trap) begin
      fetch_req_o  = 1'b1;
      fetch_addr_o = trap_vector;
    end else if (mret) begin
      fetch_req_o  = 1'b1;
      fetch_addr_o = mepc;
    end else if (commit && taken) begin
      fetch_req_o  = 1'b1;
    end
  end

  always_comb begin
    lsu_op_o       = '0;
    lsu_op_o.valid = retire && (id_ex_i.lsu != LSU_NONE);
    lsu_op_o.op    = id_ex_i.lsu;
    lsu_op_o.size  = id_ex_i.size;
    lsu_op_o.uns   = id_ex_i.lsu_unsigned;
    lsu_op_o.addr  = op1 + id_ex_i.imm;
    lsu_op_o.wdata = op2;
    lsu_op_o.rd    = id_ex_i.rd;
    lsu_op_o.pc    = id_ex_i.pc;
  end

  always_comb begin
    if (id_ex_i.jmp inside {JMP_JAL, JMP_JALR}) result = id_ex_i.pc + 32'd4;
    else if (id_ex_i.csr != CSR_NONE)           result = csr_rdata;
    else                                        result = alu_res;
  end

  `NOX_FF(clk, rst) begin
    if (`NOX_RST_ON(rst)) begin
      ex_mem_wb_o <= '0;
    end else begin
      ex_mem_wb_o.we   <= retire && id_ex_i.we_rd && (id_ex_i.lsu == LSU_NONE);
      ex_mem_wb_o.rd   <= id_ex_i.rd;
      ex_mem_wb_o.data <= result;
    end
  end

  // A load or store is only handed over while the LSU is free.
  assert property (@(posedge clk) disable iff (`NOX_RST_ON(rst)) lsu_op_o.valid |-> !lsu_bp_i)
    else $error("execute: LSU op issued while LSU busy");
endmodule
