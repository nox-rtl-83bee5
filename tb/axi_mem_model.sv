// axi_mem_model: behavioural AXI slave memory for the testbenches
// (single-beat subset of nox_pkg). Not synthesizable in intent.
// WORDS 32-bit words from address 0. Read addresses are queued and answered
// in order, each after a random wait of 0..MAX_WAIT extra cycles (at least
// one cycle after acceptance). With MAX_WAIT = 0 and RAND_READY = 0 it is a
// one-cycle memory: an address accepted at one clock edge has its data
// taken at the next, back to back. Ready signals are random when RAND_READY is
// set. Any access at or above ERR_BASE (word aligned) gets SLVERR.
// Writes honour the byte strobes. The array mem is public for the
// testbench to preload and inspect.
module axi_mem_model
  import nox_pkg::*;
#(
  parameter int unsigned WORDS      = 4096,
  parameter int unsigned MAX_WAIT   = 0,
  parameter bit          RAND_READY = 1'b0,
  parameter word_t       ERR_BASE   = 32'hF000_0000
) (
  input  logic     clk,
  input  logic     rst,
  input  cb_mosi_t mosi,
  output cb_miso_t miso
);
  word_t mem [WORDS];
  word_t rq_addr [$];
  int    r_wait;
  logic  aw_got, w_got;
  word_t aw_a, w_d;
  logic [3:0] w_s;
  int    b_wait;
  logic  b_pend;
  int unsigned reads, writes;

  function automatic int unsigned idx(input word_t a);
    return (a >> 2) % WORDS;
  endfunction

  initial begin
    miso = '0;
    for (int i = 0; i < WORDS; i++) mem[i] = 32'h0000_0013;
    reads = 0; writes = 0;
  end

  always @(posedge clk) begin
    if (rst) begin
      miso   <= '0;
      rq_addr.delete();
      r_wait <= 0;
      aw_got <= 0; w_got <= 0; b_pend <= 0; b_wait <= 0;
    end else begin
      // read address
      if (mosi.ar_valid && miso.ar_ready) rq_addr.push_back(mosi.ar_addr);
      miso.ar_ready <= RAND_READY ? ($urandom_range(0, 3) != 0) : 1'b1;
      // read data
      // (a new response may follow in the cycle the previous one is taken)
      if (miso.r_valid && mosi.r_ready) miso.r_valid <= 1'b0;
      if ((!miso.r_valid || mosi.r_ready) && rq_addr.size() > 0) begin
        if (r_wait > 0) r_wait <= r_wait - 1;
        else begin
          word_t a;
          a = rq_addr.pop_front();
          miso.r_valid <= 1'b1;
          miso.r_data  <= mem[idx(a)];
          miso.r_resp  <= (a >= ERR_BASE) ? RESP_SLVERR : RESP_OKAY;
          r_wait       <= (MAX_WAIT > 0) ? $urandom_range(0, MAX_WAIT) : 0;
          reads++;
        end
      end
      // write address and data
      if (mosi.aw_valid && miso.aw_ready) begin aw_got <= 1; aw_a <= mosi.aw_addr; end
      if (mosi.w_valid && miso.w_ready) begin w_got <= 1; w_d <= mosi.w_data; w_s <= mosi.w_strb; end
      miso.aw_ready <= !aw_got && !(mosi.aw_valid && miso.aw_ready) && (RAND_READY ? ($urandom_range(0, 2) != 0) : 1'b1);
      miso.w_ready  <= !w_got  && !(mosi.w_valid && miso.w_ready)  && (RAND_READY ? ($urandom_range(0, 2) != 0) : 1'b1);
      if (aw_got && w_got && !b_pend) begin
        if (aw_a < ERR_BASE)
          for (int b = 0; b < 4; b++) if (w_s[b]) mem[idx(aw_a)][8*b +: 8] <= w_d[8*b +: 8];
        b_pend <= 1; b_wait <= (MAX_WAIT > 0) ? $urandom_range(0, MAX_WAIT) : 0;
        writes++;
      end
      if (b_pend && !miso.b_valid) begin
        if (b_wait > 0) b_wait <= b_wait - 1;
        else begin
          miso.b_valid <= 1'b1;
          miso.b_resp  <= (aw_a >= ERR_BASE) ? RESP_SLVERR : RESP_OKAY;
        end
      end
      if (miso.b_valid && mosi.b_ready) begin
        miso.b_valid <= 1'b0; b_pend <= 0; aw_got <= 0; w_got <= 0;
      end
    end
  end
endmodule
