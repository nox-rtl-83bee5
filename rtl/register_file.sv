// register_file: the 32 x 32-bit integer register file of RV32I.
// Two combinational read ports and one synchronous write port, as the
// decode stage reads two source registers and writeback writes one result
// per cycle. x0 always reads zero and ignores writes. The registers are
// flip-flops (no latches), reset synchronously to zero. A read of the
// register being written in the same cycle returns the old value; the
// decode stage adds the write-through bypass around it.
`include "nox_defines.svh"

module register_file #(
  parameter int unsigned NREGS = 32
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [4:0]  rs1_addr_i,
  input  logic [4:0]  rs2_addr_i,
  output logic [31:0] rs1_data_o,
  output logic [31:0] rs2_data_o,
  input  logic        we_i,
  input  logic [4:0]  rd_addr_i,
  input  logic [31:0] rd_data_i
);
  logic [31:0] regs [1:NREGS-1];

  `NOX_FF(clk, rst) begin
    if (`NOX_RST_ON(rst)) begin
      for (int i = 1; i < NREGS; i++) regs[i] <= '0;
    end else if (we_i && rd_addr_i != 5'd0 && 32'(rd_addr_i) < NREGS) begin
      regs[rd_addr_i] <= rd_data_i;
    end
  end

  always_comb begin
    rs1_data_o = (rs1_addr_i == 5'd0 || 32'(rs1_addr_i) >= NREGS) ? '0 : regs[rs1_addr_i];
    rs2_data_o = (rs2_addr_i == 5'd0 || 32'(rs2_addr_i) >= NREGS) ? '0 : regs[rs2_addr_i];
  end
endmodule
