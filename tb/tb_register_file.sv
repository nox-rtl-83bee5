// tb_register_file: random writes and reads against an array model; checks
// both read ports, that x0 stays zero, and that a same-cycle read returns
// the old value.
module tb_register_file;
  logic clk = 0, rst = 1, we_i = 0;
  logic [4:0] rs1_addr_i, rs2_addr_i, rd_addr_i;
  logic [31:0] rs1_data_o, rs2_data_o, rd_data_i;
  logic [31:0] model [32];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  register_file dut (.*);

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %08h expected %08h", what, got, exp); end
  endtask

  initial begin
    foreach (model[i]) model[i] = '0;
    rs1_addr_i = 0; rs2_addr_i = 0; rd_addr_i = 0; rd_data_i = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we_i       = $urandom_range(0, 1);
      rd_addr_i  = 5'($urandom);
      rd_data_i  = $urandom;
      rs1_addr_i = (i % 7 == 0) ? rd_addr_i : 5'($urandom);
      rs2_addr_i = (i % 11 == 0) ? 5'd0 : 5'($urandom);
      #1;
      check("rs1", rs1_data_o, model[rs1_addr_i]);
      check("rs2", rs2_data_o, model[rs2_addr_i]);
      @(posedge clk);
      if (we_i && rd_addr_i != 0) model[rd_addr_i] = rd_data_i;
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
