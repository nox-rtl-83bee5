// tb_fetch: the fetch stage against an AXI memory with random waits and
// ready. A consumer with random fetch_ready checks that instructions come
// out in program order with the right pc and word, across random redirects
// (fetch_req) issued while reads are in flight. A jump to just below the
// error region must deliver the good words, then raise fetch_trap with the
// faulting address, and a redirect must clear it. The FIFO must fill up
// at least once when the consumer stalls, and a response must be seen
// waiting on the bus (r_ready low) while the FIFO is full.
module tb_fetch;
  import nox_pkg::*;
  logic clk = 0, rst = 1, start_fetch_i = 0, fetch_req_i = 0, fetch_ready_i = 0;
  word_t start_addr_i = 32'h40, fetch_addr_i = '0;
  cb_mosi_t instr_cb_mosi_o;
  cb_miso_t instr_cb_miso_i;
  logic fetch_valid_o;
  fetch_instr_t fetch_instr_o;
  trap_t fetch_trap_o;
  int checks = 0, failures = 0, n_redirect = 0, n_full = 0, n_deliver = 0, n_hold = 0;
  word_t exp_pc;

  always #5 clk = ~clk;

  fetch dut (.*);
  axi_mem_model #(.WORDS(256), .MAX_WAIT(3), .RAND_READY(1'b1), .ERR_BASE(32'h800))
    mem (.clk (clk), .rst (rst), .mosi (instr_cb_mosi_o), .miso (instr_cb_miso_i));

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %08h expected %08h", what, got, exp); end
  endtask

  function automatic word_t content(input word_t pc);
    return {pc[15:0] ^ 16'hA5C3, pc[15:0]};
  endfunction

  // consumer: check each instruction taken
  always @(posedge clk) if (!rst) begin
    if (dut.fifo_full) n_full++;
    if (instr_cb_miso_i.r_valid && !instr_cb_mosi_o.r_ready) n_hold++;
    if (fetch_valid_o && fetch_ready_i) begin
      n_deliver++;
      check("pc", fetch_instr_o.pc, exp_pc);
      check("instr", fetch_instr_o.instr, content({22'd0, fetch_instr_o.pc[9:2], 2'b00}));
      exp_pc = exp_pc + 4;
    end
    if (fetch_req_i) exp_pc = fetch_addr_i;
  end

  initial begin
    exp_pc = 32'h40;
    repeat (2) @(posedge clk);
    foreach (mem.mem[i]) mem.mem[i] = content(32'(i) * 4);
    @(negedge clk) rst = 0;
    start_fetch_i = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      fetch_ready_i = (i % 200 < 20) ? 1'b0 : ($urandom_range(0, 3) != 0);
      fetch_req_i   = ($urandom_range(0, 60) == 0);
      fetch_addr_i  = {$urandom_range(0, 250), 2'b00};
      if (fetch_req_i) n_redirect++;
    end
    // run into the error region
    @(negedge clk);
    fetch_req_i = 1; fetch_addr_i = 32'h7F0; fetch_ready_i = 1;
    @(negedge clk);
    fetch_req_i = 0;
    for (int i = 0; i < 100 && !fetch_trap_o.active; i++) @(negedge clk);
    check("trap raised", fetch_trap_o.active, 1'b1);
    check("trap cause", fetch_trap_o.cause, CAUSE_IACCESS_FAULT);
    check("trap mtval", fetch_trap_o.mtval, 32'h800);
    check("good words before the fault", exp_pc, 32'h800);
    fetch_req_i = 1; fetch_addr_i = 32'h80;
    @(negedge clk);
    fetch_req_i = 0;
    check("trap cleared", fetch_trap_o.active, 1'b0);
    repeat (50) @(negedge clk);
    check("running again", exp_pc > 32'h80, 1'b1);
    checks++;
    if (n_full == 0 || n_hold == 0 || n_redirect == 0 || n_deliver < 500) begin
      failures++; $display("FAIL coverage full=%0d held=%0d redirect=%0d delivered=%0d", n_full, n_hold, n_redirect, n_deliver);
    end
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
