// lsu_check: the random load/store test of the LSU for one setting of its
// trap parameters, used by tb_lsu. Random loads and stores of every size go
// to an AXI memory with random waits; a word model of the memory predicts
// every load word and the memory contents after stores (byte strobes: the
// lanes from the byte offset to the end of the word). With the traps
// enabled, misaligned accesses and accesses to the error region must raise
// the right trap with address and pc; with them disabled, the same accesses
// must complete without a trap (a failed store leaves memory unchanged, a
// failed load still delivers its data). The LSU must stay busy (lsu_bp)
// while an access is outstanding. checks/failures count the results and
// done rises at the end.
module lsu_check
  import nox_pkg::*;
#(
  parameter bit TRAP_MISALIGNED = 1'b1,
  parameter bit TRAP_BUS_ERROR  = 1'b1
) (
  output int   checks,
  output int   failures,
  output logic done
);
  logic clk = 0, rst = 1;
  lsu_op_t    lsu_op_i;
  logic       lsu_bp_o, lsu_bp_data_o;
  word_t      lsu_pc_o, lsu_rd_data_o;
  trap_t      lsu_trap_o;
  lsu_op_wb_t lsu_op_wb_o;
  cb_mosi_t   lsu_cb_mosi_o;
  cb_miso_t   lsu_cb_miso_i;
  word_t model [256];
  int n_load = 0, n_store = 0, n_mis = 0, n_err = 0;

  always #5 clk = ~clk;

  lsu #(.TRAP_MISALIGNED(TRAP_MISALIGNED), .TRAP_BUS_ERROR(TRAP_BUS_ERROR)) dut (.*);
  axi_mem_model #(.WORDS(256), .MAX_WAIT(3), .RAND_READY(1'b1), .ERR_BASE(32'h0000_0800))
    mem (.clk (clk), .rst (rst), .mosi (lsu_cb_mosi_o), .miso (lsu_cb_miso_i));

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %08h expected %08h", what, got, exp); end
  endtask

  initial begin
    checks = 0; failures = 0; done = 1'b0;
    lsu_op_i = '0;
    repeat (2) @(posedge clk);
    foreach (model[i]) begin model[i] = $urandom; mem.mem[i] = model[i]; end
    @(negedge clk) rst = 0;
    for (int i = 0; i < 600; i++) begin
      lsu_op_t o;
      logic mis, err;
      int cyc;
      o = '0;
      o.valid = 1'b1;
      o.op    = ($urandom_range(0, 1) != 0) ? LSU_LOAD : LSU_STORE;
      o.size  = lsu_size_t'($urandom_range(0, 2));
      o.uns   = $urandom_range(0, 1);
      o.rd    = 5'($urandom);
      o.pc    = $urandom;
      o.wdata = $urandom;
      o.addr  = $urandom_range(0, 1023);
      if ($urandom_range(0, 5) != 0) o.addr = o.addr & ~((32'd1 << o.size) - 1);
      if ($urandom_range(0, 15) == 0) o.addr = o.addr | 32'h800;
      mis = TRAP_MISALIGNED && ((o.size == SZ_HALF && o.addr[0]) || (o.size == SZ_WORD && o.addr[1:0] != 0));
      err = !mis && (o.addr >= 32'h800);
      if (err) n_err++;
      @(negedge clk);
      check("idle before op", lsu_bp_o, 1'b0);
      lsu_op_i = o;
      @(negedge clk);
      lsu_op_i = '0;
      check("busy after op", lsu_bp_o, 1'b1);
      if (mis) begin
        n_mis++;
        check("misaligned trap", lsu_trap_o.active, 1'b1);
        check("misaligned cause", lsu_trap_o.cause, o.op == LSU_LOAD ? CAUSE_LOAD_MISALIGNED : CAUSE_STORE_MISALIGNED);
        check("misaligned mtval", lsu_trap_o.mtval, o.addr);
        check("misaligned pc", lsu_pc_o, o.pc);
        continue;
      end
      cyc = 0;
      while (lsu_bp_o && !lsu_trap_o.active && cyc < 50) begin
        if (o.op == LSU_LOAD) begin
          check("load pending", lsu_op_wb_o.valid, 1'b1);
          if (!lsu_bp_data_o) begin
            n_load++;
            check("load word", lsu_rd_data_o, model[o.addr[9:2]]);
            check("load rd", lsu_op_wb_o.rd, o.rd);
            check("load offset", lsu_op_wb_o.offset, o.addr[1:0]);
            check("load size", lsu_op_wb_o.size, o.size);
          end
        end
        @(negedge clk);
        cyc++;
      end
      if (err && TRAP_BUS_ERROR) begin
        check("fault trap", lsu_trap_o.active, 1'b1);
        check("fault cause", lsu_trap_o.cause, o.op == LSU_LOAD ? CAUSE_LOAD_FAULT : CAUSE_STORE_FAULT);
        check("fault mtval", lsu_trap_o.mtval, o.addr);
        check("fault pc", lsu_pc_o, o.pc);
      end else begin
        check("no trap", lsu_trap_o.active, 1'b0);
        if (o.op == LSU_STORE && !err) begin
          word_t w;
          w = model[o.addr[9:2]];
          n_store++;
          for (int b = 0; b < 4; b++) begin
            logic en;
            // lanes from the byte offset on, within the addressed word
            en = (b >= o.addr[1:0]) && (b < o.addr[1:0] + (1 << o.size));
            if (en) w[8*b +: 8] = (o.wdata << (8 * o.addr[1:0])) >> (8 * b);
          end
          model[o.addr[9:2]] = w;
          check("store result", mem.mem[o.addr[9:2]], w);
        end else if (o.op == LSU_STORE) begin
          check("failed store leaves memory", mem.mem[o.addr[9:2]], model[o.addr[9:2]]);
        end
      end
    end
    checks++;
    if (n_load == 0 || n_store == 0 || (TRAP_MISALIGNED && n_mis == 0) || n_err == 0) begin
      failures++; $display("FAIL coverage %0d %0d %0d %0d", n_load, n_store, n_mis, n_err);
    end
    done = 1'b1;
  end
endmodule
