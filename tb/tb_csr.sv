// tb_csr: the CSR block on its own. Checks read values and write masks of
// the machine registers, the set/clear commands, read-only and missing
// addresses (illegal), trap entry (mepc, mcause, mtval, MIE -> MPIE),
// direct and vectored trap vectors, MRET, the interrupt priority and
// enable logic, and the cycle and retired-instruction counters.
module tb_csr;
  import nox_pkg::*;
  logic clk = 0, rst = 1;
  logic csr_valid_i = 0, csr_write_i = 0, trap_i = 0, mret_i = 0, retire_i = 0;
  csr_cmd_t csr_cmd_i = CSR_NONE;
  logic [11:0] csr_addr_i = '0;
  word_t csr_wdata_i = '0, csr_rdata_o, trap_cause_i = '0, trap_pc_i = '0, trap_val_i = '0;
  word_t trap_vector_o, mepc_o, irq_cause_o;
  logic csr_illegal_o, irq_pending_o, irq_take_o;
  irq_t irq_i = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  csr #(.HART_ID(32'd5)) dut (.*);

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %08h expected %08h", what, got, exp); end
  endtask

  task automatic rd(input logic [11:0] a, output word_t v);
    @(negedge clk);
    csr_addr_i = a; csr_cmd_i = CSR_RS; csr_write_i = 0; csr_valid_i = 0;
    #1 v = csr_rdata_o;
  endtask
  task automatic wr(input logic [11:0] a, input csr_cmd_t c, input word_t d);
    @(negedge clk);
    csr_addr_i = a; csr_cmd_i = c; csr_wdata_i = d; csr_write_i = 1; csr_valid_i = 1;
    @(negedge clk);
    csr_valid_i = 0; csr_write_i = 0;
  endtask
  task automatic expect_csr(input string n, input logic [11:0] a, input word_t e);
    word_t v;
    rd(a, v);
    check(n, v, e);
  endtask

  initial begin
    word_t c0, c1;
    repeat (2) @(negedge clk);
    rst = 0;
    expect_csr("misa", CSR_MISA, 32'h4000_0100);
    expect_csr("mhartid", CSR_MHARTID, 32'd5);
    expect_csr("mstatus reset", CSR_MSTATUS, 32'h0000_1800);
    wr(CSR_MSCRATCH, CSR_RW, 32'hDEAD_BEEF); expect_csr("mscratch", CSR_MSCRATCH, 32'hDEAD_BEEF);
    wr(CSR_MSCRATCH, CSR_RC, 32'h0000_FFFF); expect_csr("mscratch clear", CSR_MSCRATCH, 32'hDEAD_0000);
    wr(CSR_MSCRATCH, CSR_RS, 32'h0000_00F1); expect_csr("mscratch set", CSR_MSCRATCH, 32'hDEAD_00F1);
    wr(CSR_MSTATUS, CSR_RW, 32'hFFFF_FFFF);  expect_csr("mstatus mask", CSR_MSTATUS, 32'h0000_1888);
    wr(CSR_MSTATUS, CSR_RW, 32'h0);          expect_csr("mstatus clear", CSR_MSTATUS, 32'h0000_1800);
    wr(CSR_MIE, CSR_RW, 32'hFFFF_FFFF);      expect_csr("mie mask", CSR_MIE, 32'h0000_0888);
    wr(CSR_MEPC, CSR_RW, 32'h1234_5677);     expect_csr("mepc aligned", CSR_MEPC, 32'h1234_5674);
    wr(CSR_MTVEC, CSR_RW, 32'h0000_0403);    expect_csr("mtvec mode", CSR_MTVEC, 32'h0000_0401);
    // illegal accesses
    @(negedge clk); csr_addr_i = 12'h7C0; csr_write_i = 0; #1 check("missing csr", csr_illegal_o, 1'b1);
    csr_addr_i = CSR_MHARTID; csr_write_i = 1; #1 check("write read-only", csr_illegal_o, 1'b1);
    csr_write_i = 0; #1 check("read read-only", csr_illegal_o, 1'b0);
    csr_addr_i = CSR_MTVAL; csr_write_i = 1; #1 check("write mtval legal", csr_illegal_o, 1'b0);
    csr_write_i = 0;
    // interrupts: vectored mode, enable all
    @(negedge clk); irq_i = '{ext: 1'b0, tmr: 1'b1, sw: 1'b1};
    #1 check("pending", irq_pending_o, 1'b1);
    check("no take with MIE=0", irq_take_o, 1'b0);
    check("sw over timer", irq_cause_o, CAUSE_IRQ_SW);
    irq_i.ext = 1; #1 check("ext first", irq_cause_o, CAUSE_IRQ_EXT);
    check("mip", dut.mip, 32'h0000_0888);
    wr(CSR_MSTATUS, CSR_RS, 32'h8);
    #1 check("take with MIE=1", irq_take_o, 1'b1);
    trap_cause_i = CAUSE_IRQ_EXT;
    #1 check("vectored target", trap_vector_o, 32'h0000_0400 + 4 * 11);
    trap_cause_i = CAUSE_ECALL_M;
    #1 check("exception target", trap_vector_o, 32'h0000_0400);
    // trap entry
    @(negedge clk);
    trap_i = 1; trap_cause_i = CAUSE_IRQ_EXT; trap_pc_i = 32'h0000_0124; trap_val_i = 32'h55;
    @(negedge clk);
    trap_i = 0;
    check("mepc_o", mepc_o, 32'h0000_0124);
    expect_csr("mcause", CSR_MCAUSE, CAUSE_IRQ_EXT);
    expect_csr("mtval", CSR_MTVAL, 32'h55);
    expect_csr("mstatus after trap", CSR_MSTATUS, 32'h0000_1880);
    check("no take in handler", irq_take_o, 1'b0);
    @(negedge clk); mret_i = 1; @(negedge clk); mret_i = 0;
    expect_csr("mstatus after mret", CSR_MSTATUS, 32'h0000_1888);
    irq_i = '0;
    #1 check("nothing pending", irq_pending_o, 1'b0);
    wr(CSR_MIE, CSR_RC, 32'h800);
    irq_i.ext = 1;
    #1 check("masked ext", irq_pending_o, 1'b0);
    irq_i = '0;
    // counters
    rd(CSR_MCYCLE, c0); repeat (10) @(negedge clk); rd(CSR_CYCLE, c1);
    check("mcycle counts cycles", c1 - c0, 11);
    wr(CSR_MINSTRET, CSR_RW, 32'hFFFF_FFFE);
    @(negedge clk); retire_i = 1; repeat (3) @(negedge clk); retire_i = 0;
    expect_csr("minstret low", CSR_INSTRET, 32'h0000_0001);
    expect_csr("minstret carry", CSR_MINSTRETH, 32'h0000_0001);
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
