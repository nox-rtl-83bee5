// ahb_bridge: turns one NoX core-bus master (the single-beat AXI subset of
// nox_pkg) into an AMBA AHB-Lite master, for builds of the core whose fetch
// and LSU masters sit on AHB instead of AXI (nox parameter BUS_AHB).
// It carries one transfer at a time:
//   IDLE   - accepts a read (AR) or, when no read is offered, a write whose
//            AW and W are both valid; ar_ready / aw_ready / w_ready are
//            high only in this state.
//   ADDR   - address phase: HTRANS = NONSEQ with HADDR, HSIZE (the AxSIZE
//            code), HWRITE, HBURST = SINGLE; held until HREADY.
//   DATA   - data phase: HTRANS = IDLE, HWDATA driven for a write; ends at
//            the first cycle with HREADY high, capturing HRDATA and HRESP.
//   RESP   - returns the result on R (r_resp SLVERR for an AHB ERROR) or B,
//            held until the core takes it.
// Timing: with a zero-wait slave a transfer takes three cycles from AR/AW
// acceptance to the response handshake (address phase, data phase, response); the address of the next transfer
// is not overlapped with the data phase of the current one.
// Write data: the core already places store bytes on their lanes of the
// 32-bit bus, which is also where AHB expects them for HADDR/HSIZE, so
// w_data passes to HWDATA unchanged and w_strb is not needed.
// That the fetch and LSU masters can use AHB follows the paper, which names
// the option and no more; this bridge, its states and its one-transfer
// policy are this design's own.
`include "nox_defines.svh"

module ahb_bridge
  import nox_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  cb_mosi_t  cb_mosi_i,
  output cb_miso_t  cb_miso_o,
  output ahb_mosi_t ahb_mosi_o,
  input  ahb_miso_t ahb_miso_i
);
  typedef enum logic [1:0] {ST_IDLE, ST_ADDR, ST_DATA, ST_RESP} state_t;

  state_t     state;
  logic       wr;
  word_t      addr, wdata, rdata;
  logic [2:0] size;
  logic       err;
  logic       take_rd, take_wr;

  assign take_rd = (state == ST_IDLE) && cb_mosi_i.ar_valid;
  assign take_wr = (state == ST_IDLE) && !cb_mosi_i.ar_valid &&
                   cb_mosi_i.aw_valid && cb_mosi_i.w_valid;

  `NOX_FF(clk, rst) begin
    if (`NOX_RST_ON(rst)) begin
      state <= ST_IDLE;
      wr    <= 1'b0;
      addr  <= '0;
      wdata <= '0;
      rdata <= '0;
      size  <= '0;
      err   <= 1'b0;
    end else begin
      unique case (state)
        ST_IDLE: begin
          if (take_rd) begin
            wr    <= 1'b0;
            addr  <= cb_mosi_i.ar_addr;
            size  <= cb_mosi_i.ar_size;
            state <= ST_ADDR;
          end else if (take_wr) begin
            wr    <= 1'b1;
            addr  <= cb_mosi_i.aw_addr;
            size  <= cb_mosi_i.aw_size;
            wdata <= cb_mosi_i.w_data;
            state <= ST_ADDR;
          end
        end
        ST_ADDR: if (ahb_miso_i.hready) state <= ST_DATA;
        ST_DATA: if (ahb_miso_i.hready) begin
          rdata <= ahb_miso_i.hrdata;
          err   <= ahb_miso_i.hresp;
          state <= ST_RESP;
        end
        ST_RESP: begin
          if (( wr && cb_mosi_i.b_ready) || (!wr && cb_mosi_i.r_ready)) state <= ST_IDLE;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  always_comb begin
    ahb_mosi_o        = '0;
    ahb_mosi_o.haddr  = addr;
    ahb_mosi_o.htrans = (state == ST_ADDR) ? HTRANS_NONSEQ : HTRANS_IDLE;
    ahb_mosi_o.hwrite = wr;
    ahb_mosi_o.hsize  = size;
    ahb_mosi_o.hburst = 3'b000;
    ahb_mosi_o.hprot  = 4'b0011;   // data access, privileged, as in AHB's default
    ahb_mosi_o.hwdata = wdata;
  end

  always_comb begin
    cb_miso_o          = '0;
    cb_miso_o.ar_ready = (state == ST_IDLE);
    cb_miso_o.aw_ready = take_wr;
    cb_miso_o.w_ready  = take_wr;
    cb_miso_o.r_valid  = (state == ST_RESP) && !wr;
    cb_miso_o.r_data   = rdata;
    cb_miso_o.r_resp   = err ? RESP_SLVERR : RESP_OKAY;
    cb_miso_o.b_valid  = (state == ST_RESP) && wr;
    cb_miso_o.b_resp   = err ? RESP_SLVERR : RESP_OKAY;
  end

  // AHB-Lite: the address phase is held until the slave is ready.
  assert property (@(posedge clk) disable iff (`NOX_RST_ON(rst))
                   (ahb_mosi_o.htrans == HTRANS_NONSEQ && !ahb_miso_i.hready) |=>
                   (ahb_mosi_o.htrans == HTRANS_NONSEQ && $stable(ahb_mosi_o.haddr)))
    else $error("ahb_bridge: address phase changed before HREADY");
endmodule
