// decode: the instruction-decode stage of NoX, with the register file.
// It takes one instruction per cycle from the fetch FIFO (fetch_valid /
// fetch_ready), decodes RV32I, the six Zicsr instructions, ECALL, EBREAK,
// MRET and WFI into an id_ex_t record, reads the two source registers and
// registers record and operands for execute (id_valid / id_ready).
// Encodings outside that set decode to SYS_ILLEGAL, which execute turns into
// an illegal-instruction trap. FENCE and FENCE.I are no-ops: there are no
// caches and the bus completes accesses in order.
//
// Bypassing: the register file is written by writeback through wb_dec_i. A
// write in the same cycle as the read is passed straight to the operand, and
// while execute holds an instruction (id_valid high, id_ready low) its
// registered operands are refreshed from every write that hits its source
// registers. Together with execute forwarding from wb_dec, this leaves no
// read-after-write hazard that needs a stall except an outstanding load.
//
// fetch_req_i (a redirect from execute) drops the instruction held here and
// refuses the FIFO head in that cycle. Latency: one cycle, fetch to execute.
// That decode holds the register file, handles the fetch/LSU back-pressure
// handshake and flags the decode traps follows the paper; the record layout,
// the write-through and the refresh are this design's way of doing it.
`include "nox_defines.svh"

module decode
  import nox_pkg::*;
(
  input  logic         clk,
  input  logic         rst,
  input  logic         fetch_valid_i,
  output logic         fetch_ready_o,
  input  fetch_instr_t fetch_instr_i,
  input  logic         fetch_req_i,
  input  wb_dec_t      wb_dec_i,
  output id_ex_t       id_ex_o,
  output word_t        rs1_data_o,
  output word_t        rs2_data_o,
  output logic         id_valid_o,
  input  logic         id_ready_i
);
  id_ex_t     dec;
  word_t      instr, rf_rs1, rf_rs2, op1, op2;
  logic [6:0] opcode, funct7;
  logic [2:0] funct3;
  logic       illegal;

  assign instr  = fetch_instr_i.instr;
  assign opcode = instr[6:0];
  assign funct3 = instr[14:12];
  assign funct7 = instr[31:25];

  always_comb begin
    dec          = '0;
    illegal      = 1'b0;
    dec.pc       = fetch_instr_i.pc;
    dec.instr    = instr;
    dec.rs1      = instr[19:15];
    dec.rs2      = instr[24:20];
    dec.rd       = instr[11:7];
    dec.funct3   = funct3;
    dec.alu      = ALU_ADD;
    dec.opa      = OPA_RS1;
    dec.opb      = OPB_RS2;
    dec.jmp      = JMP_NONE;
    dec.lsu      = LSU_NONE;
    dec.size     = SZ_WORD;
    dec.csr      = CSR_NONE;
    dec.sys      = SYS_NONE;
    dec.csr_addr = instr[31:20];
    dec.csr_imm  = funct3[2];
    dec.lsu_unsigned = funct3[2];
    unique case (opcode)
      OPC_LUI: begin
        dec.we_rd = 1'b1; dec.opa = OPA_ZERO; dec.opb = OPB_IMM;
        dec.imm   = {instr[31:12], 12'd0};
      end
      OPC_AUIPC: begin
        dec.we_rd = 1'b1; dec.opa = OPA_PC; dec.opb = OPB_IMM;
        dec.imm   = {instr[31:12], 12'd0};
      end
      OPC_JAL: begin
        dec.we_rd = 1'b1; dec.jmp = JMP_JAL;
        dec.imm   = {{12{instr[31]}}, instr[19:12], instr[20], instr[30:21], 1'b0};
      end
      OPC_JALR: begin
        dec.we_rd = 1'b1; dec.jmp = JMP_JALR;
        dec.imm   = {{21{instr[31]}}, instr[30:20]};
        illegal   = (funct3 != 3'b000);
      end
      OPC_BRANCH: begin
        dec.jmp = JMP_BRANCH;
        dec.imm = {{20{instr[31]}}, instr[7], instr[30:25], instr[11:8], 1'b0};
        illegal = (funct3 inside {3'b010, 3'b011});
      end
      OPC_LOAD: begin
        dec.we_rd = 1'b1; dec.lsu = LSU_LOAD;
        dec.imm   = {{21{instr[31]}}, instr[30:20]};
        dec.size  = lsu_size_t'(funct3[1:0]);
        illegal   = !(funct3 inside {3'b000, 3'b001, 3'b010, 3'b100, 3'b101});
      end
      OPC_STORE: begin
        dec.lsu  = LSU_STORE;
        dec.imm  = {{21{instr[31]}}, instr[30:25], instr[11:7]};
        dec.size = lsu_size_t'(funct3[1:0]);
        illegal  = !(funct3 inside {3'b000, 3'b001, 3'b010});
      end
      OPC_OPIMM: begin
        dec.we_rd = 1'b1; dec.opb = OPB_IMM;
        dec.imm   = {{21{instr[31]}}, instr[30:20]};
        unique case (funct3)
          3'b000: dec.alu = ALU_ADD;
          3'b010: dec.alu = ALU_SLT;
          3'b011: dec.alu = ALU_SLTU;
          3'b100: dec.alu = ALU_XOR;
          3'b110: dec.alu = ALU_OR;
          3'b111: dec.alu = ALU_AND;
          3'b001: begin dec.alu = ALU_SLL; illegal = (funct7 != 7'b0000000); end
          default: begin
            dec.alu = (funct7 == 7'b0100000) ? ALU_SRA : ALU_SRL;
            illegal = !(funct7 inside {7'b0000000, 7'b0100000});
          end
        endcase
      end
      OPC_OP: begin
        dec.we_rd = 1'b1;
        unique case (funct3)
          3'b000: dec.alu = (funct7 == 7'b0100000) ? ALU_SUB : ALU_ADD;
          3'b001: dec.alu = ALU_SLL;
          3'b010: dec.alu = ALU_SLT;
          3'b011: dec.alu = ALU_SLTU;
          3'b100: dec.alu = ALU_XOR;
          3'b101: dec.alu = (funct7 == 7'b0100000) ? ALU_SRA : ALU_SRL;
          3'b110: dec.alu = ALU_OR;
          default: dec.alu = ALU_AND;
        endcase
        if (funct3 inside {3'b000, 3'b101})
          illegal = !(funct7 inside {7'b0000000, 7'b0100000});
        else
          illegal = (funct7 != 7'b0000000);
      end
      OPC_FENCE: begin
        illegal = !(funct3 inside {3'b000, 3'b001});
      end
      OPC_SYSTEM: begin
        if (funct3 == 3'b000) begin
          unique case (instr)
            32'h0000_0073: dec.sys = SYS_ECALL;
            32'h0010_0073: dec.sys = SYS_EBREAK;
            32'h3020_0073: dec.sys = SYS_MRET;
            32'h1050_0073: dec.sys = SYS_WFI;
            default:       illegal = 1'b1;
          endcase
        end else if (funct3 == 3'b100) begin
          illegal = 1'b1;
        end else begin
          dec.we_rd = 1'b1;
          unique case (funct3[1:0])
            2'b01:   dec.csr = CSR_RW;
            2'b10:   dec.csr = CSR_RS;
            default: dec.csr = CSR_RC;
          endcase
        end
      end
      default: illegal = 1'b1;
    endcase
    if (instr[1:0] != 2'b11) illegal = 1'b1;
    if (illegal) begin
      dec.sys   = SYS_ILLEGAL;
      dec.we_rd = 1'b0;
      dec.jmp   = JMP_NONE;
      dec.lsu   = LSU_NONE;
      dec.csr   = CSR_NONE;
    end
  end

  // Register file; its write port is the writeback stage's wb_dec.
  register_file u_register_file (
    .clk        (clk),
    .rst        (rst),
    .rs1_addr_i (dec.rs1),
    .rs2_addr_i (dec.rs2),
    .rs1_data_o (rf_rs1),
    .rs2_data_o (rf_rs2),
    .we_i       (wb_dec_i.we),
    .rd_addr_i  (wb_dec_i.rd_addr),
    .rd_data_i  (wb_dec_i.rd_data)
  );

  function automatic logic hits(input wb_dec_t w, input logic [4:0] r);
    return w.we && (w.rd_addr == r) && (r != 5'd0);
  endfunction

  // write-through of the write in progress
  assign op1 = hits(wb_dec_i, dec.rs1) ? wb_dec_i.rd_data : rf_rs1;
  assign op2 = hits(wb_dec_i, dec.rs2) ? wb_dec_i.rd_data : rf_rs2;

  assign fetch_ready_o = !fetch_req_i && (!id_valid_o || id_ready_i);

  `NOX_FF(clk, rst) begin
    if (`NOX_RST_ON(rst)) begin
      id_valid_o <= 1'b0;
      id_ex_o    <= '0;
      rs1_data_o <= '0;
      rs2_data_o <= '0;
    end else if (fetch_req_i) begin
      id_valid_o <= 1'b0;
    end else if (fetch_ready_o) begin
      id_valid_o <= fetch_valid_i;
      if (fetch_valid_i) begin
        id_ex_o    <= dec;
        rs1_data_o <= op1;
        rs2_data_o <= op2;
      end
    end else begin
      // execute holds the instruction: keep its operands current
      if (hits(wb_dec_i, id_ex_o.rs1)) rs1_data_o <= wb_dec_i.rd_data;
      if (hits(wb_dec_i, id_ex_o.rs2)) rs2_data_o <= wb_dec_i.rd_data;
    end
  end
endmodule
