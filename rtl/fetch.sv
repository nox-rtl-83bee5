// fetch: the instruction-fetch stage of NoX.
// Once start_fetch_i is seen high after reset, the stage reads words from
// start_addr_i upward over the read channels of an AXI master
// (instr_cb_mosi_o / instr_cb_miso_i) and queues each returned word,
// together with its pc, in the level-0 pre-fetch FIFO (fifo_l0). Decode takes
// the head with the fetch_valid/fetch_ready handshake.
//
// The bus may answer after any number of cycles. A new read is only issued
// when the FIFO, plus one response waiting on the bus, has room for it and
// for every read still in flight. r_ready is low only when a response that
// is to be kept finds the FIFO full with no pop in that cycle; the response
// then waits on the R channel. This lets a 2-entry FIFO on a one-cycle bus
// deliver one instruction per cycle (a rule that never lowered r_ready
// would need a third entry for that). ar_valid/ar_addr come from flops and
// stay stable until accepted. r_ready depends combinationally on
// fetch_ready_i (through the pop).
//
// fetch_req_i/fetch_addr_i (from execute: a taken branch, jump, trap or
// mret) empty the FIFO at once and restart fetching at fetch_addr_i. Reads
// already issued are not cancelled on the bus; their responses are counted
// and dropped when they arrive.
//
// A read answered with an error response stops fetching. Once the FIFO has
// drained, fetch_trap_o reports an instruction access fault with the faulting
// address; execute takes the trap when no older instruction is left and
// redirects fetching with fetch_req_i, which clears it.
// Timing: a redirect in cycle t puts the new address on ar_addr in t+1;
// with a one-cycle bus, the instruction is at the FIFO head in t+3.
// The FIFO, the AXI interface and fetch_trap follow the paper; the credit
// rule, the drop counter and start behaviour are this design's choices.
`include "nox_defines.svh"

module fetch
  import nox_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 2
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         start_fetch_i,
  input  word_t        start_addr_i,
  output cb_mosi_t     instr_cb_mosi_o,
  input  cb_miso_t     instr_cb_miso_i,
  input  logic         fetch_req_i,
  input  word_t        fetch_addr_i,
  output logic         fetch_valid_o,
  input  logic         fetch_ready_i,
  output fetch_instr_t fetch_instr_o,
  output trap_t        fetch_trap_o
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH+2) + 1;

  logic          running;      // start_fetch_i has been seen
  logic          halted;       // a read came back with an error
  word_t         err_addr;
  word_t         req_pc;       // address of the next read to issue
  word_t         resp_pc;      // address of the next response kept
  logic          ar_valid_q;
  word_t         ar_addr_q;
  logic [CW-1:0] inflight;     // reads accepted by the bus, no response yet
  logic [CW-1:0] drop;         // issued reads whose response is discarded
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;
  logic          fifo_empty, fifo_full;

  logic ar_fire, r_ready, r_fire, keep_resp, resp_err, push, pop, issue;
  logic [CW-1:0] pending, live, reserved_next;

  assign ar_fire   = ar_valid_q && instr_cb_miso_i.ar_ready;
  // A response is refused only when it would be kept and the FIFO has no
  // room for it in this cycle; it then waits on the bus.
  assign r_ready   = (drop != '0) || halted || !fifo_full || pop;
  assign r_fire    = instr_cb_miso_i.r_valid && r_ready;
  assign keep_resp = r_fire && (drop == '0);
  assign resp_err  = instr_cb_miso_i.r_resp inside {RESP_SLVERR, RESP_DECERR};
  assign push      = keep_resp && !resp_err && !halted && !fetch_req_i;
  assign pop       = fetch_valid_o && fetch_ready_i;

  // Reads issued and not answered, and those among them whose data is kept.
  assign pending = inflight + CW'(ar_valid_q);
  assign live    = pending - drop;
  // FIFO slots needed after this cycle by data already asked for.
  assign reserved_next = CW'(fifo_count) + live - CW'(pop);

  // A new read can go out when the address channel is free after this cycle
  // and the reads asked for, this one included, need no more than the FIFO
  // plus one response waiting on the bus.
  assign issue = running && !halted && !fetch_req_i &&
                 (!ar_valid_q || ar_fire) && (reserved_next <= CW'(FIFO_DEPTH));

  `NOX_FF(clk, rst) begin
    if (`NOX_RST_ON(rst)) begin
      running    <= 1'b0;
      halted     <= 1'b0;
      err_addr   <= '0;
      req_pc     <= '0;
      resp_pc    <= '0;
      ar_valid_q <= 1'b0;
      ar_addr_q  <= '0;
      inflight   <= '0;
      drop       <= '0;
    end else begin
      inflight <= inflight + CW'(ar_fire) - CW'(r_fire);
      if (!running) begin
        if (start_fetch_i) begin
          running <= 1'b1;
          req_pc  <= start_addr_i;
          resp_pc <= start_addr_i;
        end
      end else if (fetch_req_i) begin
        halted  <= 1'b0;
        resp_pc <= fetch_addr_i;
        // every read not yet answered belongs to the old path
        drop    <= pending - CW'(r_fire);
        if (!ar_valid_q || ar_fire) begin
          ar_valid_q <= 1'b1;
          ar_addr_q  <= fetch_addr_i;
          req_pc     <= fetch_addr_i + 32'd4;
        end else begin
          req_pc     <= fetch_addr_i;
        end
      end else begin
        if (r_fire && drop != '0) drop <= drop - 1'b1;
        if (keep_resp && !halted) begin
          resp_pc <= resp_pc + 32'd4;
          if (resp_err) begin
            halted   <= 1'b1;
            err_addr <= resp_pc;
          end
        end
        if (issue) begin
          ar_valid_q <= 1'b1;
          ar_addr_q  <= req_pc;
          req_pc     <= req_pc + 32'd4;
        end else if (ar_fire) begin
          ar_valid_q <= 1'b0;
        end
      end
    end
  end

  fifo_l0 #(.DEPTH(FIFO_DEPTH), .WIDTH($bits(fetch_instr_t))) u_fifo_l0 (
    .clk   (clk),
    .rst   (rst),
    .flush (fetch_req_i),
    .push  (push),
    .din   ({resp_pc, instr_cb_miso_i.r_data}),
    .pop   (pop),
    .dout  (fetch_instr_o),
    .empty (fifo_empty),
    .full  (fifo_full),
    .count (fifo_count)
  );

  assign fetch_valid_o = !fifo_empty && !fetch_req_i;

  always_comb begin
    fetch_trap_o        = '0;
    fetch_trap_o.active = halted && fifo_empty;
    fetch_trap_o.cause  = CAUSE_IACCESS_FAULT;
    fetch_trap_o.mtval  = err_addr;
  end

  always_comb begin
    instr_cb_mosi_o          = '0;
    instr_cb_mosi_o.ar_addr  = ar_addr_q;
    instr_cb_mosi_o.ar_size  = 3'd2;
    instr_cb_mosi_o.ar_valid = ar_valid_q;
    instr_cb_mosi_o.r_ready  = r_ready;
  end

  // The credit rule keeps the FIFO from overflowing.
  assert property (@(posedge clk) disable iff (`NOX_RST_ON(rst)) push |-> (!fifo_full || pop))
    else $error("fetch: response with no FIFO space");
  // AXI: an address, once offered, is held until accepted.
  assert property (@(posedge clk) disable iff (`NOX_RST_ON(rst))
                   (ar_valid_q && !instr_cb_miso_i.ar_ready) |=> (ar_valid_q && $stable(ar_addr_q)))
    else $error("fetch: AR changed before acceptance");
endmodule
