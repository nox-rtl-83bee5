// csr: machine-mode control and status registers of NoX.
// Holds mstatus (MIE, MPIE; MPP reads as machine mode), misa, mie, mip,
// mtvec (direct or vectored), mscratch, mepc, mcause, mtval, the identity
// registers and the profiling counters mcycle/minstret (64 bit) with their
// read-only user aliases cycle/instret.
//
// Access: csr_addr_i is decoded combinationally; csr_rdata_o is the old
// value and csr_illegal_o flags an address that does not exist or a write
// to a read-only register. When csr_valid_i is high (execute commits the
// instruction) and csr_write_i is set, the new value (write, set or clear
// of csr_wdata_i) is stored at the clock edge.
// Traps: trap_i stores trap_pc_i in mepc, trap_cause_i in mcause and
// trap_val_i in mtval, copies MIE to MPIE and clears MIE. trap_vector_o is
// the handler address for trap_cause_i (mtvec base, plus 4 x cause for an
// interrupt in vectored mode). mret_i restores MIE from MPIE and sets MPIE.
// Interrupts: mip mirrors irq_i each cycle; irq_pending_o is any enabled
// pending interrupt (what WFI waits for) and irq_take_o is that and
// mstatus.MIE, with irq_cause_o by priority external > software > timer.
// That these registers, traps, interrupts and the profiling counters live
// in one CSR block of the execute stage follows the paper; the register set
// is the one the RISC-V privileged specification asks of a machine-mode-only
// core, chosen here.
`include "nox_defines.svh"

module csr
  import nox_pkg::*;
#(
  parameter word_t HART_ID     = 32'd0,
  parameter word_t MTVEC_RESET = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        csr_valid_i,
  input  csr_cmd_t    csr_cmd_i,
  input  logic        csr_write_i,
  input  logic [11:0] csr_addr_i,
  input  word_t       csr_wdata_i,
  output word_t       csr_rdata_o,
  output logic        csr_illegal_o,
  input  irq_t        irq_i,
  input  logic        trap_i,
  input  word_t       trap_cause_i,
  input  word_t       trap_pc_i,
  input  word_t       trap_val_i,
  output word_t       trap_vector_o,
  input  logic        mret_i,
  input  logic        retire_i,
  output word_t       mepc_o,
  output logic        irq_pending_o,
  output logic        irq_take_o,
  output word_t       irq_cause_o
);
  logic        mstatus_mie, mstatus_mpie;
  logic        mie_meie, mie_mtie, mie_msie;
  word_t       mtvec, mscratch, mepc, mcause, mtval;
  logic [63:0] mcycle, minstret;
  word_t       mstatus, mie, mip, wval;
  logic        exists, wr;

  assign mstatus = {19'd0, 2'b11, 3'd0, mstatus_mpie, 3'd0, mstatus_mie, 3'd0};
  assign mie     = {20'd0, mie_meie, 3'd0, mie_mtie, 3'd0, mie_msie, 3'd0};
  assign mip     = {20'd0, irq_i.ext, 3'd0, irq_i.tmr, 3'd0, irq_i.sw, 3'd0};

  always_comb begin
    exists      = 1'b1;
    csr_rdata_o = '0;
    unique case (csr_addr_i)
      CSR_MSTATUS:   csr_rdata_o = mstatus;
      CSR_MISA:      csr_rdata_o = MISA_VALUE;
      CSR_MIE:       csr_rdata_o = mie;
      CSR_MTVEC:     csr_rdata_o = mtvec;
      CSR_MSCRATCH:  csr_rdata_o = mscratch;
      CSR_MEPC:      csr_rdata_o = mepc;
      CSR_MCAUSE:    csr_rdata_o = mcause;
      CSR_MTVAL:     csr_rdata_o = mtval;
      CSR_MIP:       csr_rdata_o = mip;
      CSR_MCYCLE,    CSR_CYCLE:    csr_rdata_o = mcycle[31:0];
      CSR_MCYCLEH,   CSR_CYCLEH:   csr_rdata_o = mcycle[63:32];
      CSR_MINSTRET,  CSR_INSTRET:  csr_rdata_o = minstret[31:0];
      CSR_MINSTRETH, CSR_INSTRETH: csr_rdata_o = minstret[63:32];
      CSR_MVENDORID, CSR_MARCHID, CSR_MIMPID: csr_rdata_o = '0;
      CSR_MHARTID:   csr_rdata_o = HART_ID;
      default:       exists = 1'b0;
    endcase
    csr_illegal_o = !exists || (csr_write_i && csr_addr_i[11:10] == 2'b11);
  end

  always_comb begin
    unique case (csr_cmd_i)
      CSR_RS:  wval = csr_rdata_o | csr_wdata_i;
      CSR_RC:  wval = csr_rdata_o & ~csr_wdata_i;
      default: wval = csr_wdata_i;
    endcase
  end

  assign wr = csr_valid_i && csr_write_i && !csr_illegal_o && (csr_cmd_i != CSR_NONE);

  // interrupts
  logic p_ext, p_sw, p_tmr;
  assign p_ext = irq_i.ext && mie_meie;
  assign p_sw  = irq_i.sw  && mie_msie;
  assign p_tmr = irq_i.tmr && mie_mtie;
  assign irq_pending_o = p_ext || p_sw || p_tmr;
  assign irq_take_o    = irq_pending_o && mstatus_mie;
  assign irq_cause_o   = p_ext ? CAUSE_IRQ_EXT : (p_sw ? CAUSE_IRQ_SW : CAUSE_IRQ_TMR);

  assign trap_vector_o = (mtvec[0] && trap_cause_i[31])
                       ? {mtvec[31:2], 2'b00} + {trap_cause_i[29:0], 2'b00}
                       : {mtvec[31:2], 2'b00};
  assign mepc_o = mepc;

  `NOX_FF(clk, rst) begin
    if (`NOX_RST_ON(rst)) begin
      mstatus_mie  <= 1'b0;
      mstatus_mpie <= 1'b0;
      mie_meie     <= 1'b0;
      mie_mtie     <= 1'b0;
      mie_msie     <= 1'b0;
      mtvec        <= MTVEC_RESET;
      mscratch     <= '0;
      mepc         <= '0;
      mcause       <= '0;
      mtval        <= '0;
      mcycle       <= '0;
      minstret     <= '0;
    end else begin
      mcycle   <= mcycle + 64'd1;
      if (retire_i) minstret <= minstret + 64'd1;
      if (trap_i) begin
        mepc         <= {trap_pc_i[31:2], 2'b00};
        mcause       <= trap_cause_i;
        mtval        <= trap_val_i;
        mstatus_mpie <= mstatus_mie;
        mstatus_mie  <= 1'b0;
      end else if (mret_i) begin
        mstatus_mie  <= mstatus_mpie;
        mstatus_mpie <= 1'b1;
      end else if (wr) begin
        unique case (csr_addr_i)
          CSR_MSTATUS: begin
            mstatus_mie  <= wval[3];
            mstatus_mpie <= wval[7];
          end
          CSR_MIE: begin
            mie_meie <= wval[11];
            mie_mtie <= wval[7];
            mie_msie <= wval[3];
          end
          CSR_MTVEC:     mtvec    <= {wval[31:2], 1'b0, wval[0]};
          CSR_MSCRATCH:  mscratch <= wval;
          CSR_MEPC:      mepc     <= {wval[31:2], 2'b00};
          CSR_MCAUSE:    mcause   <= wval;
          CSR_MTVAL:     mtval    <= wval;
          CSR_MCYCLE:    mcycle[31:0]    <= wval;
          CSR_MCYCLEH:   mcycle[63:32]   <= wval;
          CSR_MINSTRET:  minstret[31:0]  <= wval;
          CSR_MINSTRETH: minstret[63:32] <= wval;
          default: ;
        endcase
      end
    end
  end
endmodule
