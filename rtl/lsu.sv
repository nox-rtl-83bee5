// lsu: the load and store unit of NoX.
// Takes one load or store from execute (lsu_op_i, only while lsu_bp_o is
// low) and performs it as a single AXI transfer on lsu_cb_mosi_o /
// lsu_cb_miso_i. Sub-word accesses keep their byte address and size
// (AxSIZE); a store's data is shifted onto its byte lanes and enabled with
// write strobes, and a load's word is handed to writeback unshifted
// (lsu_rd_data_o) with the byte offset and size in lsu_op_wb_o.
// Store: AW and W are offered together and may be accepted in either order;
// the store is finished when the B response arrives. Load: AR, then R.
// lsu_bp_o is high from the cycle after an op is accepted until its
// response has been taken, and in the cycle a trap is reported.
// lsu_op_wb_o.valid is high while a load is outstanding; lsu_bp_data_o is
// low only in the cycle good read data is present.
// Traps: an access not aligned to its size (when TRAP_MISALIGNED is set) is
// not sent; the next cycle lsu_trap_o reports a load/store address
// misaligned trap with the address as mtval and the instruction's pc on
// lsu_pc_o. An error response reports a load/store access fault the cycle
// after it arrives; a failed load writes no register.
// Without the traps: TRAP_MISALIGNED = 0 sends a misaligned access as it
// is; only the lanes from its byte offset to the end of the addressed word
// are written (a store's bytes that would cross into the next word are
// lost), and a load returns that word, so splitting such an access is left
// to software. TRAP_BUS_ERROR = 0 ignores error responses: a failed load
// writes the returned data and a failed store completes silently.
// That the LSU handles aligned and sub-word transfers on AMBA buses and
// raises the misalignment and bus-error traps with the pc (lsu_pc) follows
// the paper; one outstanding access and the state machine are this design's.
`include "nox_defines.svh"

module lsu
  import nox_pkg::*;
#(
  parameter bit TRAP_MISALIGNED = 1'b1,
  parameter bit TRAP_BUS_ERROR  = 1'b1
) (
  input  logic       clk,
  input  logic       rst,
  input  lsu_op_t    lsu_op_i,
  output logic       lsu_bp_o,
  output word_t      lsu_pc_o,
  output trap_t      lsu_trap_o,
  output lsu_op_wb_t lsu_op_wb_o,
  output word_t      lsu_rd_data_o,
  output logic       lsu_bp_data_o,
  output cb_mosi_t   lsu_cb_mosi_o,
  input  cb_miso_t   lsu_cb_miso_i
);
  typedef enum logic [2:0] {ST_IDLE, ST_AR, ST_R, ST_AW_W, ST_B} state_t;

  state_t  state;
  lsu_op_t op;
  logic    aw_done, w_done;
  trap_t   trap_q;
  word_t   trap_pc_q;
  logic    misaligned, accept, r_err, b_err;
  logic [3:0] strb;

  assign accept = (state == ST_IDLE) && !trap_q.active && lsu_op_i.valid;

  always_comb begin
    unique case (lsu_op_i.size)
      SZ_HALF: misaligned = lsu_op_i.addr[0];
      SZ_WORD: misaligned = (lsu_op_i.addr[1:0] != 2'b00);
      default: misaligned = 1'b0;
    endcase
  end

  // error responses that raise a trap (none when TRAP_BUS_ERROR is clear)
  assign r_err = TRAP_BUS_ERROR && (lsu_cb_miso_i.r_resp inside {RESP_SLVERR, RESP_DECERR});
  assign b_err = TRAP_BUS_ERROR && (lsu_cb_miso_i.b_resp inside {RESP_SLVERR, RESP_DECERR});

  `NOX_FF(clk, rst) begin
    if (`NOX_RST_ON(rst)) begin
      state     <= ST_IDLE;
      op        <= '0;
      aw_done   <= 1'b0;
      w_done    <= 1'b0;
      trap_q    <= '0;
      trap_pc_q <= '0;
    end else begin
      trap_q.active <= 1'b0;
      unique case (state)
        ST_IDLE: if (accept) begin
          op <= lsu_op_i;
          if (misaligned && TRAP_MISALIGNED) begin
            trap_q.active <= 1'b1;
            trap_q.cause  <= (lsu_op_i.op == LSU_LOAD) ? CAUSE_LOAD_MISALIGNED : CAUSE_STORE_MISALIGNED;
            trap_q.mtval  <= lsu_op_i.addr;
            trap_pc_q     <= lsu_op_i.pc;
          end else if (lsu_op_i.op == LSU_LOAD) begin
            state <= ST_AR;
          end else if (lsu_op_i.op == LSU_STORE) begin
            state   <= ST_AW_W;
            aw_done <= 1'b0;
            w_done  <= 1'b0;
          end
        end
        ST_AR: if (lsu_cb_miso_i.ar_ready) state <= ST_R;
        ST_R: if (lsu_cb_miso_i.r_valid) begin
          state <= ST_IDLE;
          if (r_err) begin
            trap_q.active <= 1'b1;
            trap_q.cause  <= CAUSE_LOAD_FAULT;
            trap_q.mtval  <= op.addr;
            trap_pc_q     <= op.pc;
          end
        end
        ST_AW_W: begin
          if (lsu_cb_miso_i.aw_ready) aw_done <= 1'b1;
          if (lsu_cb_miso_i.w_ready)  w_done  <= 1'b1;
          if ((aw_done || lsu_cb_miso_i.aw_ready) && (w_done || lsu_cb_miso_i.w_ready))
            state <= ST_B;
        end
        ST_B: if (lsu_cb_miso_i.b_valid) begin
          state <= ST_IDLE;
          if (b_err) begin
            trap_q.active <= 1'b1;
            trap_q.cause  <= CAUSE_STORE_FAULT;
            trap_q.mtval  <= op.addr;
            trap_pc_q     <= op.pc;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign lsu_bp_o   = (state != ST_IDLE) || trap_q.active;
  assign lsu_pc_o   = trap_pc_q;
  assign lsu_trap_o = trap_q;

  always_comb begin
    lsu_op_wb_o        = '0;
    lsu_op_wb_o.valid  = (state == ST_AR) || (state == ST_R);
    lsu_op_wb_o.rd     = op.rd;
    lsu_op_wb_o.size   = op.size;
    lsu_op_wb_o.uns    = op.uns;
    lsu_op_wb_o.offset = op.addr[1:0];
  end
  assign lsu_rd_data_o = lsu_cb_miso_i.r_data;
  assign lsu_bp_data_o = !((state == ST_R) && lsu_cb_miso_i.r_valid && !r_err);

  always_comb begin
    unique case (op.size)
      SZ_BYTE: strb = 4'b0001 << op.addr[1:0];
      SZ_HALF: strb = 4'b0011 << op.addr[1:0];
      default: strb = 4'b1111 << op.addr[1:0];
    endcase
  end

  always_comb begin
    lsu_cb_mosi_o          = '0;
    lsu_cb_mosi_o.ar_addr  = op.addr;
    lsu_cb_mosi_o.ar_size  = {1'b0, op.size};
    lsu_cb_mosi_o.ar_valid = (state == ST_AR);
    lsu_cb_mosi_o.r_ready  = (state == ST_R);
    lsu_cb_mosi_o.aw_addr  = op.addr;
    lsu_cb_mosi_o.aw_size  = {1'b0, op.size};
    lsu_cb_mosi_o.aw_valid = (state == ST_AW_W) && !aw_done;
    lsu_cb_mosi_o.w_data   = op.wdata << {op.addr[1:0], 3'b000};
    lsu_cb_mosi_o.w_strb   = strb;
    lsu_cb_mosi_o.w_valid  = (state == ST_AW_W) && !w_done;
    lsu_cb_mosi_o.b_ready  = (state == ST_B);
  end

  // Execute only hands over an op while the LSU is free.
  assert property (@(posedge clk) disable iff (`NOX_RST_ON(rst)) lsu_op_i.valid |-> !lsu_bp_o)
    else $error("lsu: op offered while busy");
endmodule
