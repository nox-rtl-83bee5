// tb_wb: drives the writeback stage with random ALU results and load
// returns of every size, offset and signedness; checks the register write,
// the load alignment and extension, lock_wb and wb_fwd_load.
module tb_wb;
  import nox_pkg::*;
  ex_mem_wb_t ex_mem_wb_i;
  lsu_op_wb_t lsu_op_wb_i;
  word_t      lsu_rd_data_i;
  logic       lsu_bp_i, lsu_bp_data_i;
  wb_dec_t    wb_dec_o;
  logic       lock_wb_o, wb_fwd_load_o;
  int checks = 0, failures = 0;

  wb dut (.*);

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %08h expected %08h", what, got, exp); end
  endtask

  function automatic word_t ref_load(input word_t d, input lsu_size_t sz, input logic uns, input logic [1:0] off);
    logic [7:0] b; logic [15:0] h;
    b = d[8*off +: 8];
    h = off[1] ? d[31:16] : d[15:0];
    case (sz)
      SZ_BYTE: return uns ? word_t'(b) : word_t'($signed(b));
      SZ_HALF: return uns ? word_t'(h) : word_t'($signed(h));
      default: return d;
    endcase
  endfunction

  initial begin
    for (int i = 0; i < 2000; i++) begin
      ex_mem_wb_i.we   = $urandom_range(0, 1);
      ex_mem_wb_i.rd   = 5'($urandom);
      ex_mem_wb_i.data = $urandom;
      lsu_op_wb_i.valid  = $urandom_range(0, 1);
      lsu_op_wb_i.rd     = 5'($urandom);
      lsu_op_wb_i.size   = lsu_size_t'($urandom_range(0, 2));
      lsu_op_wb_i.uns    = $urandom_range(0, 1);
      lsu_op_wb_i.offset = (lsu_op_wb_i.size == SZ_WORD) ? 2'd0 :
                           (lsu_op_wb_i.size == SZ_HALF) ? {1'($urandom), 1'b0} : 2'($urandom);
      lsu_rd_data_i  = $urandom;
      lsu_bp_i       = lsu_op_wb_i.valid;
      lsu_bp_data_i  = $urandom_range(0, 1);
      #1;
      check("lock_wb", lock_wb_o, lsu_op_wb_i.valid);
      check("wb_fwd_load", wb_fwd_load_o, lsu_op_wb_i.valid && !lsu_bp_data_i);
      if (lsu_op_wb_i.valid && !lsu_bp_data_i) begin
        check("load we", wb_dec_o.we, lsu_op_wb_i.rd != 0);
        check("load rd", wb_dec_o.rd_addr, lsu_op_wb_i.rd);
        check("load data", wb_dec_o.rd_data,
              ref_load(lsu_rd_data_i, lsu_op_wb_i.size, lsu_op_wb_i.uns, lsu_op_wb_i.offset));
      end else begin
        check("alu we", wb_dec_o.we, ex_mem_wb_i.we && ex_mem_wb_i.rd != 0);
        if (ex_mem_wb_i.we) begin
          check("alu rd", wb_dec_o.rd_addr, ex_mem_wb_i.rd);
          check("alu data", wb_dec_o.rd_data, ex_mem_wb_i.data);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
