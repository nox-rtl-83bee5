// nox_defines.svh: reset style of the NoX core, chosen at compile time.
// By default every flop has a synchronous, active-high reset (the
// configuration the core is evaluated with). Define NOX_RESET_ASYNC for an
// asynchronous reset and NOX_RESET_ACTIVE_LOW for an active-low reset; the
// two combine. Every sequential block is written as
//   `NOX_FF(clk, rst) if (`NOX_RST_ON(rst)) ... else ...
`ifndef NOX_DEFINES_SVH
`define NOX_DEFINES_SVH

`ifdef NOX_RESET_ACTIVE_LOW
  `define NOX_RST_ON(r) (!(r))
`else
  `define NOX_RST_ON(r) (r)
`endif

`ifdef NOX_RESET_ASYNC
  `ifdef NOX_RESET_ACTIVE_LOW
    `define NOX_FF(clk, r) always_ff @(posedge clk or negedge r)
  `else
    `define NOX_FF(clk, r) always_ff @(posedge clk or posedge r)
  `endif
`else
  `define NOX_FF(clk, r) always_ff @(posedge clk)
`endif

`endif
