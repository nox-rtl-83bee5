// tb_nox: end-to-end test of the NoX core at its default parameters.
// A program, assembled here with rv_asm_pkg, runs from an instruction
// memory with random wait states and random ready; a separate data memory,
// also with random waits, holds its results. The program covers every RV32I
// operation, back-to-back dependences (forwarding), load-use, sub-word
// loads and stores, branches, JAL/JALR, the Zicsr instructions and CSRs,
// the synchronous traps (ECALL, EBREAK, illegal, misaligned load/store/jump
// target, load/store bus error, illegal CSR access), the three machine
// interrupts (one wakes a WFI) and an instruction-fetch bus error.
// Expected values are computed in this file from the instruction semantics.
// Each pipeline mechanism (forwarding, write-through, load stall, LSU and
// fetch back-pressure, FIFO full, flush, dropped fetch responses, traps,
// interrupts, WFI) is counted; one that never happens is a failure.
module tb_nox;
  import nox_pkg::*;
  import rv_asm_pkg::*;

  localparam int unsigned RES = 32'h100;   // result slots in data memory
  localparam int unsigned LOG = 32'h200;   // trap log in data memory
  localparam int unsigned HND = 32'h800;   // trap handler
  localparam int unsigned HND2 = 32'h900;  // handler for the fetch fault
  localparam int unsigned ENDA = 32'hA00;  // end loop

  logic clk = 1'b0, rst = 1'b1, start = 1'b0;
  irq_t irq;
  cb_mosi_t imosi, dmosi;
  cb_miso_t imiso, dmiso;

  always #5 clk = ~clk;

  nox dut (
    .clk (clk), .rst (rst), .start_fetch_i (start), .start_addr_i (32'h0), .irq_i (irq),
    .instr_cb_mosi_o (imosi), .instr_cb_miso_i (imiso),
    .lsu_cb_mosi_o (dmosi), .lsu_cb_miso_i (dmiso),
    .instr_ahb_mosi_o (), .instr_ahb_miso_i ('0), .lsu_ahb_mosi_o (), .lsu_ahb_miso_i ('0)
  );

  axi_mem_model #(.WORDS(1024), .MAX_WAIT(2), .RAND_READY(1'b1), .ERR_BASE(32'h8000_0000))
    imem (.clk (clk), .rst (rst), .mosi (imosi), .miso (imiso));
  axi_mem_model #(.WORDS(1024), .MAX_WAIT(3), .RAND_READY(1'b1), .ERR_BASE(32'h8000_0000))
    dmem (.clk (clk), .rst (rst), .mosi (dmosi), .miso (dmiso));

  int checks = 0, failures = 0;
  u32 prog [$];
  u32 exp_res [$];
  u32 exp_log [$];
  int unsigned cyc = 0;

  function automatic int unsigned here();
    return prog.size() * 4;
  endfunction
  function automatic void emit(input u32 i);
    prog.push_back(i);
  endfunction
  function automatic void st(input int r, input u32 e);
    emit(sw(r, 10, 4 * exp_res.size()));
    exp_res.push_back(e);
  endfunction
  function automatic void log_trap(input u32 cause, input u32 tval);
    exp_log.push_back(cause);
    exp_log.push_back(tval);
  endfunction
  function automatic void pad_to(input int unsigned addr);
    while (here() < addr) emit(NOP);
  endfunction

  task automatic check(input string what, input u32 got, input u32 exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08h expected %08h", what, got, exp);
    end
  endtask

  // ---------------------------------------------------------------- program
  u32 x1v, x2v, v;
  int unsigned p, br;

  task automatic build();
    x1v = 32'h1234_5678;
    x2v = 32'hFFFF_FFFB;
    // A: ALU and back-to-back dependences
    emit(lui(1, 32'h12345)); emit(addi(1, 1, 'h678)); emit(addi(2, 0, -5)); emit(addi(10, 0, RES));
    emit(add(3, 1, 2));    st(3, x1v + x2v);
    emit(sub(4, 1, 2));    st(4, x1v - x2v);
    emit(xor_(5, 1, 2));   st(5, x1v ^ x2v);
    emit(or_(6, 1, 2));    st(6, x1v | x2v);
    emit(and_(7, 1, 2));   st(7, x1v & x2v);
    emit(addi(8, 0, 4));
    emit(sll(9, 1, 8));    st(9, x1v << 4);
    emit(srl(11, 2, 8));   st(11, x2v >> 4);
    emit(sra(12, 2, 8));   st(12, u32'($signed(x2v) >>> 4));
    emit(slt(13, 2, 1));   st(13, 1);
    emit(sltu(14, 2, 1));  st(14, 0);
    emit(slti(15, 2, -4)); st(15, 1);
    emit(sltiu(16, 1, -1)); st(16, 1);
    emit(xori(17, 1, -1)); st(17, ~x1v);
    emit(ori(18, 2, 'h0F0)); st(18, x2v | 32'hF0);
    emit(andi(19, 1, 'h0FF)); st(19, x1v & 32'hFF);
    emit(slli(20, 1, 3));  st(20, x1v << 3);
    emit(srli(21, 2, 28)); st(21, x2v >> 28);
    emit(srai(22, 2, 2));  st(22, u32'($signed(x2v) >>> 2));
    p = here(); emit(auipc(23, 1)); st(23, p + 32'h1000);
    emit(addi(24, 0, 1));
    repeat (4) emit(add(24, 24, 24));
    st(24, 16);
    emit(addi(0, 0, 5)); emit(add(25, 0, 0)); st(25, 0);
    // B: loads and stores
    v = 32'h89AB_C000 - 32'd529;
    emit(lui(25, 32'h89ABC)); emit(addi(25, 25, -529));
    emit(sw(25, 10, 'h600));
    emit(lb(26, 10, 'h600));  st(26, {{24{v[7]}}, v[7:0]});
    emit(lbu(27, 10, 'h601)); st(27, {24'd0, v[15:8]});
    emit(lh(28, 10, 'h602));  st(28, {{16{v[31]}}, v[31:16]});
    emit(lhu(29, 10, 'h600)); st(29, {16'd0, v[15:0]});
    emit(lw(30, 10, 'h600));  emit(add(31, 30, 1)); st(31, v + x1v);
    emit(sb(1, 10, 'h605));   emit(sh(2, 10, 'h606));
    emit(lw(5, 10, 'h604));   st(5, {x2v[15:0], x1v[7:0], 8'h00});
    emit(lw(6, 10, 'h600));   emit(sw(6, 10, 'h608)); emit(lw(7, 10, 'h608)); st(7, v);
    // C: branches and jumps
    emit(addi(5, 0, 0)); emit(addi(6, 0, 10));
    emit(add(5, 5, 6)); emit(addi(6, 6, -1)); emit(bne(6, 0, -8)); st(5, 55);
    emit(addi(7, 0, 0));
    emit(blt (2, 1, 8)); emit(addi(7, 7, 100)); emit(addi(7, 7, 1));   // taken
    emit(bge (2, 1, 8)); emit(addi(7, 7, 100)); emit(addi(7, 7, 2));   // not taken
    emit(bltu(2, 1, 8)); emit(addi(7, 7, 100)); emit(addi(7, 7, 4));   // not taken
    emit(bgeu(2, 1, 8)); emit(addi(7, 7, 100)); emit(addi(7, 7, 8));   // taken
    emit(beq (1, 1, 8)); emit(addi(7, 7, 100)); emit(addi(7, 7, 16));  // taken
    emit(bne (1, 1, 8)); emit(addi(7, 7, 100)); emit(addi(7, 7, 32));  // not taken
    br = 1 + 102 + 104 + 8 + 16 + 132;
    st(7, br);
    p = here(); emit(jal(8, 8)); emit(addi(7, 7, 1000)); st(8, p + 4); st(7, br);
    p = here(); emit(auipc(9, 0)); emit(jalr(11, 9, 12)); emit(addi(7, 7, 1000));
    st(11, p + 8); st(7, br);
    // D: CSRs
    emit(csrrw(0, 'h340, 1)); emit(csrrs(12, 'h340, 0)); st(12, x1v);
    emit(csrrsi(0, 'h340, 5)); emit(csrrci(13, 'h340, 8)); st(13, x1v | 5);
    emit(csrrs(14, 'h340, 0)); st(14, (x1v | 5) & ~32'd8);
    emit(csrrwi(15, 'h340, 7)); st(15, (x1v | 5) & ~32'd8);
    emit(csrrc(16, 'h340, 0)); st(16, 7);
    emit(csrrs(17, 'hF14, 0)); st(17, 0);
    emit(csrrs(18, 'h301, 0)); st(18, 32'h4000_0100);
    emit(csrrs(19, 'hB00, 0)); emit(csrrs(20, 'hB00, 0)); emit(sub(21, 20, 19));
    emit(slti(21, 21, 1)); st(21, 0);
    emit(csrrs(22, 'hB02, 0)); repeat (3) emit(NOP); emit(csrrs(23, 'hB02, 0));
    emit(sub(24, 23, 22)); st(24, 4);
    emit(FENCE);
    // E: synchronous traps, handled at HND
    emit(addi(13, 0, 'h7ff)); emit(addi(13, 13, 1)); emit(csrrw(0, 'h305, 13));
    emit(addi(27, 0, LOG));
    emit(ECALL);              log_trap(CAUSE_ECALL_M, 0);
    p = here(); emit(EBREAK); log_trap(CAUSE_BREAKPOINT, p);
    emit(32'hFFFF_FFFF);      log_trap(CAUSE_ILLEGAL_INSTR, 32'hFFFF_FFFF);
    emit(32'h0000_0000);      log_trap(CAUSE_ILLEGAL_INSTR, 32'h0000_0000);
    emit(lw(5, 10, 1));       log_trap(CAUSE_LOAD_MISALIGNED, RES + 1);
    emit(sh(5, 10, 3));       log_trap(CAUSE_STORE_MISALIGNED, RES + 3);
    emit(addi(5, 0, 77));
    emit(lui(14, 32'h80000)); emit(lw(5, 14, 0)); log_trap(CAUSE_LOAD_FAULT, 32'h8000_0000);
    st(5, 77);
    emit(sw(5, 14, 4));       log_trap(CAUSE_STORE_FAULT, 32'h8000_0004);
    repeat (4) emit(NOP);
    p = here(); emit(auipc(9, 0)); emit(jalr(0, 9, 10)); log_trap(CAUSE_IADDR_MISALIGNED, p + 10);
    emit(csrrs(5, 'h7C0, 0)); log_trap(CAUSE_ILLEGAL_INSTR, csrrs(5, 'h7C0, 0));
    emit(csrrw(0, 'hF14, 1)); log_trap(CAUSE_ILLEGAL_INSTR, csrrw(0, 'hF14, 1));
    st(1, x1v);
    // F: interrupts
    emit(addi(15, 0, 'h7ff)); emit(addi(15, 15, 'h89)); emit(csrrw(0, 'h304, 15));
    emit(csrrsi(0, 'h300, 8));
    emit(sw(0, 0, 'h3E0));    log_trap(CAUSE_IRQ_EXT, 0);
    repeat (24) emit(NOP);
    emit(sw(0, 0, 'h3E4));    log_trap(CAUSE_IRQ_TMR, 0);
    emit(WFI);
    emit(sw(0, 0, 'h3E8));    log_trap(CAUSE_IRQ_SW, 0);
    repeat (24) emit(NOP);
    emit(csrrs(16, 'h304, 0)); st(16, 32'h888);
    // G: instruction fetch bus error, handled at HND2
    emit(addi(13, 0, 'h7ff)); emit(addi(13, 13, 'h101)); emit(csrrw(0, 'h305, 13));
    emit(lui(14, 32'h80000)); emit(jalr(0, 14, 0)); log_trap(CAUSE_IACCESS_FAULT, 32'h8000_0000);
    if (here() > HND) $fatal(1, "program too long");
    // trap handler
    pad_to(HND);
    emit(csrrs(28, 'h342, 0)); emit(csrrs(29, 'h341, 0)); emit(sw(28, 27, 0));
    emit(csrrs(30, 'h343, 0)); emit(sw(30, 27, 4)); emit(addi(27, 27, 8));
    emit(blt(28, 0, 8)); emit(addi(29, 29, 4)); emit(csrrw(0, 'h341, 29));
    emit(sw(0, 0, 'h3F0)); emit(MRET);
    pad_to(HND2);
    emit(csrrs(28, 'h342, 0)); emit(sw(28, 27, 0));
    emit(csrrs(30, 'h343, 0)); emit(sw(30, 27, 4)); emit(addi(27, 27, 8));
    p = here(); emit(jal(0, ENDA - p));
    pad_to(ENDA);
    emit(sw(0, 0, 'h3FC)); emit(jal(0, 0));
  endtask

  // ------------------------------------------------ interrupt generator
  int irq_delay = -1;
  irq_t irq_next;
  logic done = 1'b0;
  always @(posedge clk) begin
    if (rst) begin
      irq <= '0; irq_delay <= -1;
    end else begin
      if (irq_delay > 0) irq_delay <= irq_delay - 1;
      if (irq_delay == 0) begin irq <= irq_next; irq_delay <= -1; end
      if (dmosi.aw_valid && dmiso.aw_ready) begin
        unique case (dmosi.aw_addr)
          32'h3E0: begin irq_next <= '{ext: 1'b1, tmr: 1'b0, sw: 1'b0}; irq_delay <= 5;  end
          32'h3E4: begin irq_next <= '{ext: 1'b0, tmr: 1'b1, sw: 1'b0}; irq_delay <= 30; end
          32'h3E8: begin irq_next <= '{ext: 1'b0, tmr: 1'b0, sw: 1'b1}; irq_delay <= 3;  end
          32'h3F0: irq <= '0;
          32'h3FC: done <= 1'b1;
          default: ;
        endcase
      end
    end
  end

  // ------------------------------------------------ mechanism counters
  int n_fwd_ex, n_fwd_dec, n_load_stall, n_lsu_bp, n_fetch_bp, n_fifo_full, n_flush,
      n_drop, n_trap, n_irq, n_wfi, n_fetch_trap, n_lsu_trap, n_mret, n_retire;
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (dut.u_execute.commit && ((dut.u_execute.op1 != dut.rs1_data) || (dut.u_execute.op2 != dut.rs2_data))) n_fwd_ex++;
    if (dut.fetch_valid && dut.fetch_ready && ((dut.u_decode.op1 != dut.u_decode.rf_rs1) || (dut.u_decode.op2 != dut.u_decode.rf_rs2))) n_fwd_dec++;
    if (dut.id_valid && dut.u_execute.load_stall) n_load_stall++;
    if (dut.id_valid && dut.u_execute.mem_stall) n_lsu_bp++;
    if (!dut.id_valid && !dut.fetch_valid && !dut.u_fetch.halted && dut.u_fetch.running) n_fetch_bp++;
    if (dut.u_fetch.fifo_full) n_fifo_full++;
    if (dut.fetch_req) n_flush++;
    if (imiso.r_valid && dut.u_fetch.drop != 0) n_drop++;
    if (dut.u_execute.trap) n_trap++;
    if (dut.u_execute.take_irq) n_irq++;
    if (dut.id_valid && dut.u_execute.wfi_wait) n_wfi++;
    if (dut.u_execute.take_fetch_trap) n_fetch_trap++;
    if (dut.u_execute.take_lsu_trap) n_lsu_trap++;
    if (dut.u_execute.mret) n_mret++;
    if (dut.u_execute.retire) n_retire++;
  end

  task automatic need(input string what, input int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", what); end
  endtask

  // ------------------------------------------------------------ main
  initial begin
    irq_next = '0;
    build();
    repeat (3) @(posedge clk);
    foreach (imem.mem[i]) imem.mem[i] = (i < prog.size()) ? prog[i] : NOP;
    foreach (dmem.mem[i]) dmem.mem[i] = '0;
    @(negedge clk) rst = 1'b0;
    repeat (2) @(negedge clk);
    start = 1'b1;
    wait (done);
    repeat (10) @(posedge clk);
    foreach (exp_res[k]) check($sformatf("result slot %0d", k), dmem.mem[(RES >> 2) + k], exp_res[k]);
    for (int k = 0; k < exp_log.size(); k += 2) begin
      check($sformatf("trap %0d mcause", k / 2), dmem.mem[(LOG >> 2) + k],     exp_log[k]);
      check($sformatf("trap %0d mtval",  k / 2), dmem.mem[(LOG >> 2) + k + 1], exp_log[k + 1]);
    end
    check("traps taken", n_trap, exp_log.size() / 2);
    $display("program: %0d instructions retired in %0d cycles", n_retire, cyc);
    need("execute forwarding", n_fwd_ex);
    need("decode write-through", n_fwd_dec);
    need("load-use stall", n_load_stall);
    need("LSU back-pressure", n_lsu_bp);
    need("fetch back-pressure", n_fetch_bp);
    need("fetch FIFO full", n_fifo_full);
    need("pipeline flush", n_flush);
    need("dropped fetch response", n_drop);
    need("interrupt", n_irq);
    need("WFI wait", n_wfi);
    need("fetch bus-error trap", n_fetch_trap);
    need("LSU trap", n_lsu_trap);
    need("MRET", n_mret);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
