// fifo_l0: the level-0 instruction pre-fetch FIFO of the fetch stage.
// A synchronous circular buffer of DEPTH entries of WIDTH bits with a read
// pointer, a write pointer and an occupancy counter. Push and pop may happen
// in the same cycle, also when the FIFO is full (the popped slot is reused).
// dout shows the oldest entry whenever empty is low; a pop takes it away at
// the next clock edge. flush empties the FIFO at the next edge and wins over
// a push in the same cycle. Reset is synchronous and active high.
// The two-entry default is the configuration the NoX core is evaluated with;
// the buffer organisation is this design's own.
`include "nox_defines.svh"

module fifo_l0 #(
  parameter int unsigned DEPTH = 2,
  parameter int unsigned WIDTH = 64
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         flush,
  input  logic                         push,
  input  logic [WIDTH-1:0]             din,
  input  logic                         pop,
  output logic [WIDTH-1:0]             dout,
  output logic                         empty,
  output logic                         full,
  output logic [$clog2(DEPTH+1)-1:0]   count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;
  logic [CW-1:0]    cnt;
  logic             do_push, do_pop;

  assign empty   = (cnt == '0);
  assign full    = (cnt == CW'(DEPTH));
  assign count   = cnt;
  assign dout    = mem[rd_ptr];
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  `NOX_FF(clk, rst) begin
    if (`NOX_RST_ON(rst)) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else if (flush) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (do_push) wr_ptr <= incr(wr_ptr);
      if (do_pop)  rd_ptr <= incr(rd_ptr);
      cnt <= cnt + CW'(do_push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push && !flush) mem[wr_ptr] <= din;
  end

  // A push into a full FIFO without a pop would lose data.
  assert property (@(posedge clk) disable iff (`NOX_RST_ON(rst) || flush) !(push && full && !pop))
    else $error("fifo_l0: push while full");

endmodule
