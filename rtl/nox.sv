// nox: top level of the NoX RV32I-Zicsr processor core.
// A single-issue, in-order pipeline of four stages with full bypassing:
//   fetch   - AXI instruction master and level-0 pre-fetch FIFO,
//   decode  - RV32I/Zicsr decoder and the register file,
//   execute - ALU, branches, the CSR block, traps and interrupts,
//   LSU  |  Memory & Writeback - the load/store AXI master, working side by
//           side with the single register-file write port.
// Stalls happen only on back-pressure: when fetch has no instruction
// ready, or when the LSU is busy or a load has not returned its data.
// Parameters: FIFO_DEPTH sizes the fetch FIFO, HART_ID is returned by
// mhartid, MTVEC_RESET is the reset trap vector and TRAP_MISALIGNED selects
// whether misaligned loads/stores trap (1) or are issued as-is (0), and
// TRAP_BUS_ERROR whether LSU error responses trap (1) or are ignored (0).
// BUS_AHB selects the bus of both masters: 0 (default, the evaluated
// configuration) uses the AXI ports instr_cb_* / lsu_cb_*, 1 puts an
// ahb_bridge behind each master and uses the AHB-Lite ports instr_ahb_* /
// lsu_ahb_*. The ports of the unused option are outputs at zero and
// ignored inputs, which lint and synthesis report as unused.
// Interface: clk and rst (synchronous active-high by default; the
// NOX_RESET_ASYNC / NOX_RESET_ACTIVE_LOW macros of nox_defines.svh select
// the other reset styles, as the paper's reset macros do); start_fetch_i starts
// fetching at start_addr_i; irq_i carries the machine external, timer and
// software interrupt levels; instr_cb_* and lsu_cb_* are the two AXI masters
// (single-beat subset, see nox_pkg), or instr_ahb_* and lsu_ahb_* the two
// AHB-Lite masters when BUS_AHB = 1. The default of a 2-entry fetch FIFO,
// AXI buses and synchronous reset is the configuration the core is
// evaluated with. The stage split and the signal names between stages
// follow the core's block diagram.
module nox
  import nox_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH      = 2,
  parameter word_t       HART_ID         = 32'd0,
  parameter word_t       MTVEC_RESET     = 32'h0000_0000,
  parameter bit          TRAP_MISALIGNED = 1'b1,
  parameter bit          TRAP_BUS_ERROR  = 1'b1,
  parameter bit          BUS_AHB         = 1'b0
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     start_fetch_i,
  input  word_t    start_addr_i,
  input  irq_t     irq_i,
  output cb_mosi_t  instr_cb_mosi_o,
  input  cb_miso_t  instr_cb_miso_i,
  output cb_mosi_t  lsu_cb_mosi_o,
  input  cb_miso_t  lsu_cb_miso_i,
  output ahb_mosi_t instr_ahb_mosi_o,
  input  ahb_miso_t instr_ahb_miso_i,
  output ahb_mosi_t lsu_ahb_mosi_o,
  input  ahb_miso_t lsu_ahb_miso_i
);
  // stage side of the two bus masters
  cb_mosi_t instr_mosi, lsu_mosi;
  cb_miso_t instr_miso, lsu_miso;

  logic         fetch_valid, fetch_ready, fetch_req;
  word_t        fetch_addr;
  fetch_instr_t fetch_instr;
  trap_t        fetch_trap, lsu_trap;
  id_ex_t       id_ex;
  word_t        rs1_data, rs2_data, lsu_pc, lsu_rd_data;
  logic         id_valid, id_ready;
  wb_dec_t      wb_dec;
  logic         lock_wb, wb_fwd_load, lsu_bp, lsu_bp_data;
  lsu_op_t      lsu_op;
  lsu_op_wb_t   lsu_op_wb;
  ex_mem_wb_t   ex_mem_wb;

  fetch #(.FIFO_DEPTH(FIFO_DEPTH)) u_fetch (
    .clk             (clk),
    .rst             (rst),
    .start_fetch_i   (start_fetch_i),
    .start_addr_i    (start_addr_i),
    .instr_cb_mosi_o (instr_mosi),
    .instr_cb_miso_i (instr_miso),
    .fetch_req_i     (fetch_req),
    .fetch_addr_i    (fetch_addr),
    .fetch_valid_o   (fetch_valid),
    .fetch_ready_i   (fetch_ready),
    .fetch_instr_o   (fetch_instr),
    .fetch_trap_o    (fetch_trap)
  );

  decode u_decode (
    .clk           (clk),
    .rst           (rst),
    .fetch_valid_i (fetch_valid),
    .fetch_ready_o (fetch_ready),
    .fetch_instr_i (fetch_instr),
    .fetch_req_i   (fetch_req),
    .wb_dec_i      (wb_dec),
    .id_ex_o       (id_ex),
    .rs1_data_o    (rs1_data),
    .rs2_data_o    (rs2_data),
    .id_valid_o    (id_valid),
    .id_ready_i    (id_ready)
  );

  execute #(.HART_ID(HART_ID), .MTVEC_RESET(MTVEC_RESET)) u_execute (
    .clk           (clk),
    .rst           (rst),
    .id_ex_i       (id_ex),
    .rs1_data_i    (rs1_data),
    .rs2_data_i    (rs2_data),
    .id_valid_i    (id_valid),
    .id_ready_o    (id_ready),
    .wb_dec_i      (wb_dec),
    .lock_wb_i     (lock_wb),
    .wb_fwd_load_i (wb_fwd_load),
    .lsu_op_o      (lsu_op),
    .lsu_bp_i      (lsu_bp),
    .lsu_pc_i      (lsu_pc),
    .lsu_trap_i    (lsu_trap),
    .ex_mem_wb_o   (ex_mem_wb),
    .fetch_req_o   (fetch_req),
    .fetch_addr_o  (fetch_addr),
    .fetch_trap_i  (fetch_trap),
    .irq_i         (irq_i)
  );

  lsu #(.TRAP_MISALIGNED(TRAP_MISALIGNED), .TRAP_BUS_ERROR(TRAP_BUS_ERROR)) u_lsu (
    .clk           (clk),
    .rst           (rst),
    .lsu_op_i      (lsu_op),
    .lsu_bp_o      (lsu_bp),
    .lsu_pc_o      (lsu_pc),
    .lsu_trap_o    (lsu_trap),
    .lsu_op_wb_o   (lsu_op_wb),
    .lsu_rd_data_o (lsu_rd_data),
    .lsu_bp_data_o (lsu_bp_data),
    .lsu_cb_mosi_o (lsu_mosi),
    .lsu_cb_miso_i (lsu_miso)
  );

  wb u_wb (
    .ex_mem_wb_i   (ex_mem_wb),
    .lsu_op_wb_i   (lsu_op_wb),
    .lsu_rd_data_i (lsu_rd_data),
    .lsu_bp_i      (lsu_bp),
    .lsu_bp_data_i (lsu_bp_data),
    .wb_dec_o      (wb_dec),
    .lock_wb_o     (lock_wb),
    .wb_fwd_load_o (wb_fwd_load)
  );

  // Bus option: AXI directly, or AHB-Lite through one bridge per master.
  // The ports of the unused option are driven to zero.
  if (BUS_AHB) begin : g_ahb
    ahb_bridge u_instr_ahb (
      .clk        (clk),
      .rst        (rst),
      .cb_mosi_i  (instr_mosi),
      .cb_miso_o  (instr_miso),
      .ahb_mosi_o (instr_ahb_mosi_o),
      .ahb_miso_i (instr_ahb_miso_i)
    );
    ahb_bridge u_lsu_ahb (
      .clk        (clk),
      .rst        (rst),
      .cb_mosi_i  (lsu_mosi),
      .cb_miso_o  (lsu_miso),
      .ahb_mosi_o (lsu_ahb_mosi_o),
      .ahb_miso_i (lsu_ahb_miso_i)
    );
    assign instr_cb_mosi_o = '0;
    assign lsu_cb_mosi_o   = '0;
  end else begin : g_axi
    assign instr_cb_mosi_o  = instr_mosi;
    assign instr_miso       = instr_cb_miso_i;
    assign lsu_cb_mosi_o    = lsu_mosi;
    assign lsu_miso         = lsu_cb_miso_i;
    assign instr_ahb_mosi_o = '0;
    assign lsu_ahb_mosi_o   = '0;
  end
endmodule
