// nox_pkg: types and constants shared by the NoX RV32I-Zicsr core.
// It holds the core-bus structs (a single-beat subset of AMBA AXI4: separate
// read-address, read-data, write-address, write-data and write-response
// channels, each with valid/ready), the records passed between the pipeline
// stages (fetch -> decode -> execute -> LSU / writeback), the trap record and
// the RISC-V opcode, CSR-address and trap-cause constants, and the
// AHB-Lite structs of the alternative bus.
// The stage-to-stage signal names follow the core's block diagram; the field
// lists inside the records are this design's own choice.
package nox_pkg;

  typedef logic [31:0] word_t;

  // ---------------------------------------------------------------- core bus
  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } resp_t;

  // Master to slave. Sizes use the AXI AxSIZE code (0: byte, 1: half, 2: word).
  typedef struct packed {
    word_t       ar_addr;
    logic [2:0]  ar_size;
    logic        ar_valid;
    logic        r_ready;
    word_t       aw_addr;
    logic [2:0]  aw_size;
    logic        aw_valid;
    word_t       w_data;
    logic [3:0]  w_strb;
    logic        w_valid;
    logic        b_ready;
  } cb_mosi_t;

  // Slave to master.
  typedef struct packed {
    logic        ar_ready;
    word_t       r_data;
    resp_t       r_resp;
    logic        r_valid;
    logic        aw_ready;
    logic        w_ready;
    resp_t       b_resp;
    logic        b_valid;
  } cb_miso_t;

  // ------------------------------------------------- AMBA AHB-Lite master
  // The alternative bus of the fetch and LSU masters (see ahb_bridge).
  localparam logic [1:0] HTRANS_IDLE   = 2'b00;
  localparam logic [1:0] HTRANS_NONSEQ = 2'b10;

  typedef struct packed {
    word_t       haddr;
    logic [1:0]  htrans;
    logic        hwrite;
    logic [2:0]  hsize;
    logic [2:0]  hburst;    // always SINGLE (0)
    logic [3:0]  hprot;
    word_t       hwdata;
  } ahb_mosi_t;

  typedef struct packed {
    word_t       hrdata;
    logic        hready;
    logic        hresp;     // 1: ERROR
  } ahb_miso_t;

  // ------------------------------------------------------------- interrupts
  typedef struct packed {
    logic ext;   // machine external interrupt (mip.MEIP)
    logic tmr;   // machine timer interrupt    (mip.MTIP)
    logic sw;    // machine software interrupt (mip.MSIP)
  } irq_t;

  // ------------------------------------------------------------------ traps
  typedef struct packed {
    logic  active;
    word_t cause;
    word_t mtval;
  } trap_t;

  localparam word_t CAUSE_IADDR_MISALIGNED = 32'd0;
  localparam word_t CAUSE_IACCESS_FAULT    = 32'd1;
  localparam word_t CAUSE_ILLEGAL_INSTR    = 32'd2;
  localparam word_t CAUSE_BREAKPOINT       = 32'd3;
  localparam word_t CAUSE_LOAD_MISALIGNED  = 32'd4;
  localparam word_t CAUSE_LOAD_FAULT       = 32'd5;
  localparam word_t CAUSE_STORE_MISALIGNED = 32'd6;
  localparam word_t CAUSE_STORE_FAULT      = 32'd7;
  localparam word_t CAUSE_ECALL_M          = 32'd11;
  localparam word_t CAUSE_IRQ_SW           = 32'h8000_0003;
  localparam word_t CAUSE_IRQ_TMR          = 32'h8000_0007;
  localparam word_t CAUSE_IRQ_EXT          = 32'h8000_000B;

  // ---------------------------------------------------------------- opcodes
  localparam logic [6:0] OPC_LUI    = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC  = 7'b0010111;
  localparam logic [6:0] OPC_JAL    = 7'b1101111;
  localparam logic [6:0] OPC_JALR   = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH = 7'b1100011;
  localparam logic [6:0] OPC_LOAD   = 7'b0000011;
  localparam logic [6:0] OPC_STORE  = 7'b0100011;
  localparam logic [6:0] OPC_OPIMM  = 7'b0010011;
  localparam logic [6:0] OPC_OP     = 7'b0110011;
  localparam logic [6:0] OPC_FENCE  = 7'b0001111;
  localparam logic [6:0] OPC_SYSTEM = 7'b1110011;

  // ------------------------------------------------------------ CSR numbers
  localparam logic [11:0] CSR_MSTATUS   = 12'h300;
  localparam logic [11:0] CSR_MISA      = 12'h301;
  localparam logic [11:0] CSR_MIE       = 12'h304;
  localparam logic [11:0] CSR_MTVEC     = 12'h305;
  localparam logic [11:0] CSR_MSCRATCH  = 12'h340;
  localparam logic [11:0] CSR_MEPC      = 12'h341;
  localparam logic [11:0] CSR_MCAUSE    = 12'h342;
  localparam logic [11:0] CSR_MTVAL     = 12'h343;
  localparam logic [11:0] CSR_MIP       = 12'h344;
  localparam logic [11:0] CSR_MCYCLE    = 12'hB00;
  localparam logic [11:0] CSR_MINSTRET  = 12'hB02;
  localparam logic [11:0] CSR_MCYCLEH   = 12'hB80;
  localparam logic [11:0] CSR_MINSTRETH = 12'hB82;
  localparam logic [11:0] CSR_CYCLE     = 12'hC00;
  localparam logic [11:0] CSR_INSTRET   = 12'hC02;
  localparam logic [11:0] CSR_CYCLEH    = 12'hC80;
  localparam logic [11:0] CSR_INSTRETH  = 12'hC82;
  localparam logic [11:0] CSR_MVENDORID = 12'hF11;
  localparam logic [11:0] CSR_MARCHID   = 12'hF12;
  localparam logic [11:0] CSR_MIMPID    = 12'hF13;
  localparam logic [11:0] CSR_MHARTID   = 12'hF14;

  // misa: MXL = 1 (32 bit), extension I
  localparam word_t MISA_VALUE = 32'h4000_0100;

  // ----------------------------------------------------- pipeline records
  // Fetch -> Decode
  typedef struct packed {
    word_t pc;
    word_t instr;
  } fetch_instr_t;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU,
    ALU_XOR, ALU_SRL, ALU_SRA, ALU_OR,  ALU_AND
  } alu_op_t;

  typedef enum logic [1:0] {OPA_RS1, OPA_PC, OPA_ZERO} opa_t;
  typedef enum logic       {OPB_RS2, OPB_IMM} opb_t;
  typedef enum logic [1:0] {JMP_NONE, JMP_BRANCH, JMP_JAL, JMP_JALR} jmp_t;
  typedef enum logic [1:0] {LSU_NONE, LSU_LOAD, LSU_STORE} lsu_type_t;
  typedef enum logic [1:0] {SZ_BYTE, SZ_HALF, SZ_WORD} lsu_size_t;
  typedef enum logic [1:0] {CSR_NONE, CSR_RW, CSR_RS, CSR_RC} csr_cmd_t;
  typedef enum logic [2:0] {SYS_NONE, SYS_ECALL, SYS_EBREAK, SYS_MRET, SYS_WFI, SYS_ILLEGAL} sys_t;

  // Decode -> Execute
  typedef struct packed {
    word_t       pc;
    word_t       instr;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    logic        we_rd;
    word_t       imm;
    alu_op_t     alu;
    opa_t        opa;
    opb_t        opb;
    jmp_t        jmp;
    logic [2:0]  funct3;
    lsu_type_t   lsu;
    lsu_size_t   size;
    logic        lsu_unsigned;
    csr_cmd_t    csr;
    logic        csr_imm;
    logic [11:0] csr_addr;
    sys_t        sys;
  } id_ex_t;

  // Execute -> LSU
  typedef struct packed {
    logic       valid;
    lsu_type_t  op;
    lsu_size_t  size;
    logic       uns;
    word_t      addr;
    word_t      wdata;
    logic [4:0] rd;
    word_t      pc;
  } lsu_op_t;

  // LSU -> Writeback: the load that is waiting for its data
  typedef struct packed {
    logic       valid;
    logic [4:0] rd;
    lsu_size_t  size;
    logic       uns;
    logic [1:0] offset;
  } lsu_op_wb_t;

  // Execute -> Writeback
  typedef struct packed {
    logic       we;
    logic [4:0] rd;
    word_t      data;
  } ex_mem_wb_t;

  // Writeback -> Decode (register-file write port) and Execute (forwarding)
  typedef struct packed {
    logic       we;
    logic [4:0] rd_addr;
    word_t      rd_data;
  } wb_dec_t;

endpackage
