// wb: the Memory & Writeback stage of NoX.
// It owns the single register-file write port (wb_dec). Each cycle it either
// writes the ALU/CSR/jump result that execute registered in ex_mem_wb, or,
// when the LSU returns the data of an outstanding load (lsu_bp_data low while
// lsu_op_wb is valid), the load data: the addressed byte or half-word is
// shifted down from lsu_rd_data and sign- or zero-extended.
// Outputs to execute: lock_wb is high while a load is outstanding (the write
// port is reserved for it), wb_fwd_load is high in the cycle its data is on
// wb_dec, so execute can forward it and resume. Because execute holds every
// instruction while lock_wb is high and wb_fwd_load low, ex_mem_wb never
// carries a write in a cycle that load data arrives. Purely combinational.
// The stage works alongside the LSU, as the paper describes; the exact
// handshake is this design's own.
module wb
  import nox_pkg::*;
(
  input  ex_mem_wb_t ex_mem_wb_i,
  input  lsu_op_wb_t lsu_op_wb_i,
  input  word_t      lsu_rd_data_i,
  input  logic       lsu_bp_i,
  input  logic       lsu_bp_data_i,
  output wb_dec_t    wb_dec_o,
  output logic       lock_wb_o,
  output logic       wb_fwd_load_o
);
  word_t shifted, load_data;

  always_comb begin
    shifted = lsu_rd_data_i >> {lsu_op_wb_i.offset, 3'b000};
    unique case (lsu_op_wb_i.size)
      SZ_BYTE: load_data = lsu_op_wb_i.uns ? {24'd0, shifted[7:0]}  : {{24{shifted[7]}},  shifted[7:0]};
      SZ_HALF: load_data = lsu_op_wb_i.uns ? {16'd0, shifted[15:0]} : {{16{shifted[15]}}, shifted[15:0]};
      default: load_data = shifted;
    endcase
  end

  assign lock_wb_o     = lsu_op_wb_i.valid;
  assign wb_fwd_load_o = lsu_op_wb_i.valid && !lsu_bp_data_i;

  always_comb begin
    if (wb_fwd_load_o) begin
      wb_dec_o.we      = (lsu_op_wb_i.rd != 5'd0);
      wb_dec_o.rd_addr = lsu_op_wb_i.rd;
      wb_dec_o.rd_data = load_data;
    end else begin
      wb_dec_o.we      = ex_mem_wb_i.we && (ex_mem_wb_i.rd != 5'd0);
      wb_dec_o.rd_addr = ex_mem_wb_i.rd;
      wb_dec_o.rd_data = ex_mem_wb_i.data;
    end
  end

  // A load is only outstanding while the LSU is busy with it.
  always_comb begin
    if (lsu_op_wb_i.valid) assert (lsu_bp_i) else $error("wb: load pending while LSU idle");
  end

endmodule
