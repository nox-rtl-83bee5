// ahb_mem_model: behavioural AHB-Lite slave memory for the testbenches.
// Not synthesizable in intent. WORDS 32-bit words from address 0 (the
// address wraps). A transfer whose address phase is seen (HTRANS NONSEQ
// while HREADY is high) gets a data phase with a random 0..MAX_WAIT wait
// cycles (HREADY low). An address at or above ERR_BASE gets the two-cycle
// ERROR response (HRESP high with HREADY low, then with HREADY high) and
// writes nothing. Writes store the HSIZE bytes at HADDR from their lanes of
// HWDATA. The array mem is public for the testbench to preload and inspect.
module ahb_mem_model
  import nox_pkg::*;
#(
  parameter int unsigned WORDS    = 1024,
  parameter int unsigned MAX_WAIT = 0,
  parameter word_t       ERR_BASE = 32'hF000_0000
) (
  input  logic      clk,
  input  logic      rst,
  input  ahb_mosi_t mosi,
  output ahb_miso_t miso
);
  word_t      mem [WORDS];
  logic       dp_active, dp_write, erf;
  word_t      dp_addr;
  logic [2:0] dp_size;
  int         wcnt;
  logic       is_err;

  function automatic int unsigned idx(input word_t a);
    return (a >> 2) % WORDS;
  endfunction

  initial for (int i = 0; i < WORDS; i++) mem[i] = 32'h0000_0013;

  assign is_err = dp_addr >= ERR_BASE;

  always_comb begin
    miso        = '0;
    miso.hready = 1'b1;
    if (dp_active) begin
      if (wcnt > 0) miso.hready = 1'b0;
      else if (is_err && !erf) begin miso.hready = 1'b0; miso.hresp = 1'b1; end
      else begin
        miso.hresp  = is_err;
        miso.hrdata = mem[idx(dp_addr)];
      end
    end
  end

  always @(posedge clk) begin
    if (rst) begin
      dp_active <= 1'b0; dp_write <= 1'b0; erf <= 1'b0; dp_addr <= '0; dp_size <= '0; wcnt <= 0;
    end else begin
      if (dp_active) begin
        if (wcnt > 0) wcnt <= wcnt - 1;
        else if (is_err && !erf) erf <= 1'b1;
        else begin
          if (dp_write && !is_err)
            for (int b = 0; b < 4; b++)
              if (b >= dp_addr[1:0] && b < dp_addr[1:0] + (1 << dp_size))
                mem[idx(dp_addr)][8*b +: 8] <= mosi.hwdata[8*b +: 8];
          dp_active <= 1'b0;
        end
      end
      if (miso.hready && mosi.htrans == HTRANS_NONSEQ) begin
        dp_active <= 1'b1;
        dp_addr   <= mosi.haddr;
        dp_write  <= mosi.hwrite;
        dp_size   <= mosi.hsize;
        wcnt      <= (MAX_WAIT > 0) ? $urandom_range(0, MAX_WAIT) : 0;
        erf       <= 1'b0;
      end
    end
  end
endmodule
