// tb_nox_rtos: preemptive multitasking on the NoX core, the pattern a
// FreeRTOS port uses, at the core's default parameters.
// The program, assembled here with rv_asm_pkg, starts two tasks. Each task
// changes all 31 registers on every loop iteration: task A does
// x[k] += k and task B does x[k] = 2*x[k] ^ k, for k = 1..30, with x31 as
// the loop counter. When done, a task stores x1..x30 and yields forever
// with ECALL. A machine-timer model in this testbench raises irq_i.tmr a
// fixed number of cycles after the handler re-arms it (a store to 0x7F0).
// The trap handler at 0x400 is a context switch:
//  * it saves all 31 registers and mepc into the current task's control
//    block, using mscratch to hold the block pointer;
//  * on ECALL it advances mepc past the ECALL, and on a timer interrupt it
//    re-arms the timer;
//  * it switches to the other block, restores it and returns with MRET.
// Checks: both tasks' final registers against values computed here (any
// register lost in a switch shows up), the handler's tick and yield counts
// against the traps observed, and that each task was preempted in its loop
// at least once. The memories have random wait states.
// The workload is this design's own stand-in for the RTOS support the core
// is built for; the context-switch layout is the usual RISC-V one.
module tb_nox_rtos;
  import nox_pkg::*;
  import rv_asm_pkg::*;

  localparam int unsigned TASK_A = 32'h200;  // code of task A
  localparam int unsigned HND    = 32'h400;  // context-switch handler
  localparam int unsigned TASK_B = 32'h600;  // code of task B
  localparam int unsigned TCB_A  = 32'h100;  // control blocks: pc, x1..x31
  localparam int unsigned TCB_B  = 32'h200;
  localparam int unsigned RES_A  = 32'h600;  // final x1..x30 of each task
  localparam int unsigned RES_B  = 32'h700;
  localparam int unsigned FLAGS  = 32'h780;  // done flags of A and B
  localparam int unsigned TICKS  = 32'h790;  // timer interrupts counted by the handler
  localparam int unsigned YIELDS = 32'h794;  // ECALLs counted by the handler
  localparam int unsigned TIMER  = 32'h7F0;  // store here: clear and re-arm the timer
  localparam int          N_A    = 24;
  localparam int          N_B    = 14;
  localparam int          TICK   = 900;      // cycles from re-arm to interrupt

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

  axi_mem_model #(.WORDS(1024), .MAX_WAIT(1), .RAND_READY(1'b1))
    imem (.clk (clk), .rst (rst), .mosi (imosi), .miso (imiso));
  axi_mem_model #(.WORDS(1024), .MAX_WAIT(2), .RAND_READY(1'b1))
    dmem (.clk (clk), .rst (rst), .mosi (dmosi), .miso (dmiso));

  int checks = 0, failures = 0;
  u32 prog [$];

  function automatic int unsigned here();
    return prog.size() * 4;
  endfunction
  function automatic void emit(input u32 i);
    prog.push_back(i);
  endfunction
  function automatic void pad_to(input int unsigned addr);
    if (here() > addr) $fatal(1, "code overlaps 0x%0h", addr);
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
  int unsigned loop_a, loop_a_end, loop_b, loop_b_end;

  task automatic build();
    int unsigned p, br, sw_at;
    // start-up: trap vector, current control block, timer enable, task A
    emit(addi(1, 0, HND));   emit(csrrw(0, CSR_MTVEC, 1));
    emit(addi(1, 0, TCB_A)); emit(csrrw(0, CSR_MSCRATCH, 1));
    emit(addi(1, 0, 'h80));  emit(csrrw(0, CSR_MIE, 1));
    emit(sw(0, 0, TIMER));
    emit(csrrsi(0, CSR_MSTATUS, 8));
    p = here(); emit(jal(0, TASK_A - p));
    // task A
    pad_to(TASK_A);
    for (int k = 1; k <= 30; k++) emit(addi(k, 0, 0));
    emit(addi(31, 0, N_A));
    loop_a = here();
    for (int k = 1; k <= 30; k++) emit(addi(k, k, k));
    emit(addi(31, 31, -1));
    p = here(); emit(bne(31, 0, loop_a - p));
    loop_a_end = here();
    for (int k = 1; k <= 30; k++) emit(sw(k, 0, RES_A + 4 * k));
    emit(addi(1, 0, 1)); emit(sw(1, 0, FLAGS));
    emit(ECALL); emit(jal(0, -4));
    // context switch
    pad_to(HND);
    emit(csrrw(31, CSR_MSCRATCH, 31));
    for (int k = 1; k <= 30; k++) emit(sw(k, 31, 4 * k));
    emit(csrrs(1, CSR_MSCRATCH, 0)); emit(sw(1, 31, 124));
    emit(csrrs(1, CSR_MEPC, 0));
    emit(csrrs(2, CSR_MCAUSE, 0));
    emit(addi(3, 0, CAUSE_ECALL_M));
    br = prog.size(); emit(NOP);                       // bne x2, x3, irq path
    emit(addi(1, 1, 4));
    emit(lw(4, 0, YIELDS)); emit(addi(4, 4, 1)); emit(sw(4, 0, YIELDS));
    sw_at = prog.size(); emit(NOP);                    // jal switch
    prog[br] = bne(2, 3, here() - 4 * br);
    emit(sw(0, 0, TIMER));
    emit(lw(4, 0, TICKS)); emit(addi(4, 4, 1)); emit(sw(4, 0, TICKS));
    prog[sw_at] = jal(0, here() - 4 * sw_at);
    emit(sw(1, 31, 0));
    emit(xori(31, 31, TCB_A ^ TCB_B));
    emit(csrrw(0, CSR_MSCRATCH, 31));
    emit(lw(1, 31, 0)); emit(csrrw(0, CSR_MEPC, 1));
    for (int k = 1; k <= 30; k++) emit(lw(k, 31, 4 * k));
    emit(lw(31, 31, 124));
    emit(MRET);
    // task B
    pad_to(TASK_B);
    for (int k = 1; k <= 30; k++) emit(addi(k, 0, 0));
    emit(addi(31, 0, N_B));
    loop_b = here();
    for (int k = 1; k <= 30; k++) begin emit(add(k, k, k)); emit(xori(k, k, k)); end
    emit(addi(31, 31, -1));
    p = here(); emit(bne(31, 0, loop_b - p));
    loop_b_end = here();
    for (int k = 1; k <= 30; k++) emit(sw(k, 0, RES_B + 4 * k));
    emit(addi(1, 0, 1)); emit(sw(1, 0, FLAGS + 4));
    emit(ECALL); emit(jal(0, -4));
  endtask

  // ------------------------------------------------------- machine timer
  int tmr_cnt = -1;
  always @(posedge clk) begin
    if (rst) begin
      irq <= '0; tmr_cnt <= -1;
    end else begin
      if (tmr_cnt > 0) tmr_cnt <= tmr_cnt - 1;
      if (tmr_cnt == 0) begin irq.tmr <= 1'b1; tmr_cnt <= -1; end
      if (dmosi.aw_valid && dmiso.aw_ready && dmosi.aw_addr == TIMER) begin
        irq.tmr <= 1'b0; tmr_cnt <= TICK;
      end
    end
  end

  // ------------------------------------------------ counters
  int unsigned cyc = 0, n_tick = 0, n_yield = 0, n_pre_a = 0, n_pre_b = 0, n_retire = 0;
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (dut.u_execute.retire) n_retire++;
    if (dut.u_execute.take_irq) begin
      n_tick++;
      if (dut.id_ex.pc >= loop_a && dut.id_ex.pc < loop_a_end) n_pre_a++;
      if (dut.id_ex.pc >= loop_b && dut.id_ex.pc < loop_b_end) n_pre_b++;
    end
    if (dut.u_execute.trap && !dut.u_execute.take_irq && dut.id_ex.sys == SYS_ECALL) n_yield++;
  end

  task automatic need(input string what, input int n);
    checks++;
    $display("  %-34s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL never seen: %s", what); end
  endtask

  // ------------------------------------------------------------ main
  u32 ea [31], eb [31];
  initial begin
    build();
    for (int k = 1; k <= 30; k++) begin
      ea[k] = u32'(N_A * k);
      eb[k] = 0;
      repeat (N_B) eb[k] = (eb[k] << 1) ^ u32'(k);
    end
    repeat (3) @(posedge clk);
    foreach (imem.mem[i]) imem.mem[i] = (i < prog.size()) ? prog[i] : NOP;
    foreach (dmem.mem[i]) dmem.mem[i] = '0;
    dmem.mem[TCB_B >> 2] = TASK_B;            // task B starts at its entry
    @(negedge clk) rst = 1'b0;
    repeat (2) @(negedge clk);
    start = 1'b1;
    wait (dmem.mem[FLAGS >> 2] == 1 && dmem.mem[(FLAGS >> 2) + 1] == 1);
    repeat (20) @(posedge clk);
    for (int k = 1; k <= 30; k++) begin
      check($sformatf("task A x%0d", k), dmem.mem[(RES_A >> 2) + k], ea[k]);
      check($sformatf("task B x%0d", k), dmem.mem[(RES_B >> 2) + k], eb[k]);
    end
    // the handler's own counts must agree with the traps the core took
    // (the last switch may still be on its way when the flags are seen)
    checks++;
    if (dmem.mem[TICKS >> 2] + 1 < n_tick || dmem.mem[TICKS >> 2] > n_tick) begin
      failures++; $display("FAIL tick count: handler %0d, core %0d", dmem.mem[TICKS >> 2], n_tick);
    end
    checks++;
    if (dmem.mem[YIELDS >> 2] + 1 < n_yield || dmem.mem[YIELDS >> 2] > n_yield) begin
      failures++; $display("FAIL yield count: handler %0d, core %0d", dmem.mem[YIELDS >> 2], n_yield);
    end
    $display("%0d instructions retired in %0d cycles", n_retire, cyc);
    need("timer interrupts", n_tick);
    need("ECALL yields", n_yield);
    need("task A preempted inside its loop", n_pre_a);
    need("task B preempted inside its loop", n_pre_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: flags %0d %0d, ticks %0d, yields %0d, pc %08h", dmem.mem[FLAGS >> 2], dmem.mem[(FLAGS >> 2) + 1], n_tick, n_yield, dut.id_ex.pc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
