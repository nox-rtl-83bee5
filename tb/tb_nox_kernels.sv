// tb_nox_kernels: CoreMark-style kernels on the NoX core, at the core's
// default parameters, from memories that answer every read in one cycle
// (no wait states, always ready), the memory a CoreMark/MHz score assumes.
// The program, assembled here with rv_asm_pkg, runs:
//  1. a straight run of 64 independent ALU instructions, timed with mcycle
//     (checks the one-instruction-per-cycle issue rate of fetch and decode);
//  2. CRC-16 (reflected polynomial 0xA001, bit by bit) over 64 bytes, as
//     CoreMark's crcu8 does;
//  3. a 4 x 4 matrix product of 32-bit integers with a shift-and-add
//     multiply subroutine (the core has no M extension, like an RV32I
//     CoreMark build that calls a software multiply);
//  4. a walk over a 16-node linked list laid out in random order: sum and
//     count the values, then reverse the list in place.
// mcycle/minstret are read around the kernels (2-4); their difference is
// stored and compared with the cycles and retirements seen here.
// Results are compared with values computed in this file. The kernels are
// this design's own miniature of the benchmark, not CoreMark itself.
module tb_nox_kernels;
  import nox_pkg::*;
  import rv_asm_pkg::*;

  localparam int unsigned DATA  = 32'h400;   // CRC input bytes
  localparam int          LEN   = 64;
  localparam int unsigned MAT_A = 32'h500;   // 4 x 4 words each
  localparam int unsigned MAT_B = 32'h540;
  localparam int unsigned MAT_C = 32'h580;
  localparam int unsigned NODES = 32'h600;   // 16 nodes {next, value}
  localparam int          NN    = 16;
  localparam int unsigned HEAD  = 32'h6F0;
  localparam int unsigned RES   = 32'h700;   // crc, sum, count, cycles, instret, alu-run cycles
  localparam int unsigned DONE  = 32'h7FC;
  localparam int          RUN   = 64;

  logic clk = 1'b0, rst = 1'b1, start = 1'b0;
  cb_mosi_t imosi, dmosi;
  cb_miso_t imiso, dmiso;

  always #5 clk = ~clk;

  nox dut (
    .clk (clk), .rst (rst), .start_fetch_i (start), .start_addr_i (32'h0), .irq_i ('0),
    .instr_cb_mosi_o (imosi), .instr_cb_miso_i (imiso),
    .lsu_cb_mosi_o (dmosi), .lsu_cb_miso_i (dmiso),
    .instr_ahb_mosi_o (), .instr_ahb_miso_i ('0), .lsu_ahb_mosi_o (), .lsu_ahb_miso_i ('0)
  );

  axi_mem_model #(.WORDS(1024)) imem (.clk (clk), .rst (rst), .mosi (imosi), .miso (imiso));
  axi_mem_model #(.WORDS(1024)) dmem (.clk (clk), .rst (rst), .mosi (dmosi), .miso (dmiso));

  int checks = 0, failures = 0;
  u32 prog [$];

  function automatic int unsigned here();
    return prog.size() * 4;
  endfunction
  function automatic void emit(input u32 i);
    prog.push_back(i);
  endfunction

  task automatic check(input string what, input u32 got, input u32 exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08h expected %08h", what, got, exp);
    end
  endtask

  // ---------------------------------------------------------------- program
  int unsigned pc_t0, pc_t1;

  task automatic build();
    int unsigned p, l1, l2, l3, fix, mul_at, call;
    // 1. ALU run
    emit(csrrs(3, CSR_MCYCLE, 0));
    for (int k = 0; k < RUN; k++) emit(addi(5 + k % 8, 0, k));
    emit(csrrs(4, CSR_MCYCLE, 0));
    emit(sub(4, 4, 3)); emit(sw(4, 0, RES + 20));
    // start of the timed kernels
    pc_t0 = here();
    emit(csrrs(3, CSR_MCYCLE, 0)); emit(csrrs(4, CSR_MINSTRET, 0));
    // 2. CRC-16
    emit(addi(5, 0, 0)); emit(addi(6, 0, DATA)); emit(addi(7, 0, DATA + LEN));
    emit(lui(11, 32'hA)); emit(addi(11, 11, 1));
    l1 = here();
    emit(lbu(8, 6, 0)); emit(xor_(5, 5, 8)); emit(addi(9, 0, 8));
    l2 = here();
    emit(andi(10, 5, 1)); emit(srli(5, 5, 1)); emit(beq(10, 0, 8)); emit(xor_(5, 5, 11));
    emit(addi(9, 9, -1)); p = here(); emit(bne(9, 0, l2 - p));
    emit(addi(6, 6, 1)); p = here(); emit(bne(6, 7, l1 - p));
    emit(sw(5, 0, RES));
    // 3. matrix product, C = A * B
    emit(addi(20, 0, MAT_A)); emit(addi(21, 0, MAT_C)); emit(addi(16, 0, 4));
    l1 = here();
    emit(addi(22, 0, MAT_B)); emit(addi(17, 0, 4));
    l2 = here();
    emit(addi(19, 0, 0)); emit(addi(23, 20, 0)); emit(addi(24, 22, 0)); emit(addi(18, 0, 4));
    l3 = here();
    emit(lw(12, 23, 0)); emit(lw(13, 24, 0));
    call = prog.size(); emit(NOP);                      // jal x1, mul
    emit(add(19, 19, 14)); emit(addi(23, 23, 4)); emit(addi(24, 24, 16));
    emit(addi(18, 18, -1)); p = here(); emit(bne(18, 0, l3 - p));
    emit(sw(19, 21, 0)); emit(addi(21, 21, 4)); emit(addi(22, 22, 4));
    emit(addi(17, 17, -1)); p = here(); emit(bne(17, 0, l2 - p));
    emit(addi(20, 20, 16)); emit(addi(16, 16, -1)); p = here(); emit(bne(16, 0, l1 - p));
    fix = prog.size(); emit(NOP);                       // jal x0, over mul
    // multiply: x14 = x12 * x13 (mod 2^32), clobbers x12, x13, x15
    mul_at = here();
    emit(addi(14, 0, 0));
    l3 = here();
    emit(andi(15, 13, 1)); emit(beq(15, 0, 8)); emit(add(14, 14, 12));
    emit(slli(12, 12, 1)); emit(srli(13, 13, 1)); p = here(); emit(bne(13, 0, l3 - p));
    emit(jalr(0, 1, 0));
    prog[call] = jal(1, mul_at - 4 * call);
    prog[fix] = jal(0, here() - 4 * fix);
    // 4. linked list: sum, count, reverse
    emit(lw(25, 0, HEAD)); emit(addi(26, 0, 0)); emit(addi(27, 0, 0)); emit(addi(28, 0, 0));
    l1 = here();
    fix = prog.size(); emit(NOP);                       // beq x25, x0, done
    emit(lw(29, 25, 4)); emit(add(26, 26, 29)); emit(addi(27, 27, 1));
    emit(lw(30, 25, 0)); emit(sw(28, 25, 0)); emit(addi(28, 25, 0)); emit(addi(25, 30, 0));
    p = here(); emit(jal(0, l1 - p));
    prog[fix] = beq(25, 0, here() - 4 * fix);
    emit(sw(28, 0, HEAD)); emit(sw(26, 0, RES + 4)); emit(sw(27, 0, RES + 8));
    // end of the timed kernels
    pc_t1 = here();
    emit(csrrs(5, CSR_MCYCLE, 0)); emit(csrrs(6, CSR_MINSTRET, 0));
    emit(sub(5, 5, 3)); emit(sub(6, 6, 4));
    emit(sw(5, 0, RES + 12)); emit(sw(6, 0, RES + 16));
    emit(addi(1, 0, 1)); emit(sw(1, 0, DONE));
    emit(jal(0, 0));
    if (here() > 4096) $fatal(1, "program too long");
  endtask

  // ------------------------------------------------------------ counters
  int unsigned cyc = 0, c_t0 = 0, c_t1 = 0, r_t0 = 0, r_t1 = 0, n_retire = 0;
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (dut.u_execute.retire) begin
      // mcycle is read in the cycle its CSR instruction retires
      if (dut.id_ex.pc == pc_t0) begin c_t0 = cyc; r_t0 = n_retire; end
      if (dut.id_ex.pc == pc_t1) begin c_t1 = cyc; r_t1 = n_retire; end
      n_retire++;
    end
  end

  // ------------------------------------------------------------ main
  byte unsigned data [LEN];
  u32 ma [16], mb [16], mc [16], val [NN];
  int order [NN];
  u32 crc, sum;
  initial begin
    build();
    repeat (3) @(posedge clk);
    foreach (imem.mem[i]) imem.mem[i] = (i < prog.size()) ? prog[i] : NOP;
    foreach (dmem.mem[i]) dmem.mem[i] = '0;
    // CRC input and reference
    crc = 0;
    for (int i = 0; i < LEN; i++) begin
      data[i] = 8'($urandom);
      dmem.mem[(DATA + i) >> 2][8 * (i % 4) +: 8] = data[i];
      crc ^= 32'(data[i]);
      repeat (8) crc = crc[0] ? ((crc >> 1) ^ 32'hA001) : (crc >> 1);
    end
    // matrices and reference
    for (int i = 0; i < 16; i++) begin
      ma[i] = u32'($urandom_range(0, 2000)) - 1000;
      mb[i] = u32'($urandom_range(0, 2000)) - 1000;
      dmem.mem[(MAT_A >> 2) + i] = ma[i];
      dmem.mem[(MAT_B >> 2) + i] = mb[i];
    end
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        mc[4 * i + j] = 0;
        for (int k = 0; k < 4; k++) mc[4 * i + j] += ma[4 * i + k] * mb[4 * k + j];
      end
    // linked list in random order: order[n] is the slot of the n-th node
    foreach (order[n]) order[n] = n;
    order.shuffle();
    sum = 0;
    for (int n = 0; n < NN; n++) begin
      val[n] = $urandom;
      sum += val[n];
      dmem.mem[((NODES + 8 * order[n]) >> 2)]     = (n + 1 < NN) ? NODES + 8 * order[n + 1] : 0;
      dmem.mem[((NODES + 8 * order[n]) >> 2) + 1] = val[n];
    end
    dmem.mem[HEAD >> 2] = NODES + 8 * order[0];
    @(negedge clk) rst = 1'b0;
    repeat (2) @(negedge clk);
    start = 1'b1;
    wait (dmem.mem[DONE >> 2] == 1);
    repeat (10) @(posedge clk);
    check("crc16", dmem.mem[RES >> 2], crc);
    foreach (mc[i]) check($sformatf("C[%0d][%0d]", i / 4, i % 4), dmem.mem[(MAT_C >> 2) + i], mc[i]);
    check("list sum", dmem.mem[(RES >> 2) + 1], sum);
    check("list count", dmem.mem[(RES >> 2) + 2], NN);
    check("reversed head", dmem.mem[HEAD >> 2], NODES + 8 * order[NN - 1]);
    for (int n = 0; n < NN; n++)
      check($sformatf("reversed link %0d", n), dmem.mem[(NODES + 8 * order[n]) >> 2],
            (n > 0) ? NODES + 8 * order[n - 1] : 0);
    check("mcycle difference", dmem.mem[(RES >> 2) + 3], c_t1 - c_t0);
    check("minstret difference", dmem.mem[(RES >> 2) + 4], r_t1 - r_t0);
    // RUN independent ALU instructions: one per cycle once the stream flows
    checks++;
    if (dmem.mem[(RES >> 2) + 5] > RUN + 1) begin
      failures++;
      $display("FAIL ALU run of %0d took %0d cycles", RUN, dmem.mem[(RES >> 2) + 5]);
    end
    $display("ALU run: %0d instructions in %0d cycles", RUN, dmem.mem[(RES >> 2) + 5]);
    $display("kernels: %0d instructions in %0d cycles, CPI %0.2f", r_t1 - r_t0, c_t1 - c_t0,
             real'(c_t1 - c_t0) / real'(r_t1 - r_t0));
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
