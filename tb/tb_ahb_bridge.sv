// tb_ahb_bridge: the core-bus to AHB-Lite bridge against an AHB-Lite memory
// with random wait states and an error region. A master process issues 800
// random reads and writes (byte, half, word, on their byte lanes) on the
// core-bus side, with random delays before taking each response, and
// compares read data, responses and memory contents with a word model.
// It also checks that a zero-wait read takes three cycles from acceptance to
// the response handshake, and that AR, AW/W and the responses follow the
// one-transfer-at-a-time rule.
module tb_ahb_bridge;
  import nox_pkg::*;
  logic clk = 0, rst = 1;
  cb_mosi_t  cb_mosi_i;
  cb_miso_t  cb_miso_o;
  ahb_mosi_t ahb_mosi_o;
  ahb_miso_t ahb_miso_i;
  word_t model [256];
  int checks = 0, failures = 0, n_rd = 0, n_wr = 0, n_err = 0, n_wait = 0;

  always #5 clk = ~clk;

  ahb_bridge dut (.*);
  ahb_mem_model #(.WORDS(256), .MAX_WAIT(2), .ERR_BASE(32'h800))
    mem (.clk (clk), .rst (rst), .mosi (ahb_mosi_o), .miso (ahb_miso_i));

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %08h expected %08h", what, got, exp); end
  endtask

  always @(posedge clk) if (!rst && mem.dp_active && !ahb_miso_i.hready) n_wait++;

  initial begin
    cb_mosi_i = '0;
    repeat (2) @(posedge clk);
    foreach (model[i]) begin model[i] = $urandom; mem.mem[i] = model[i]; end
    @(negedge clk) rst = 0;
    for (int i = 0; i < 800; i++) begin
      logic wr, err;
      logic [2:0] size;
      word_t a, d;
      int cyc;
      wr   = $urandom_range(0, 1);
      size = 3'($urandom_range(0, 2));
      a    = $urandom_range(0, 1023) & ~((32'd1 << size) - 1);
      if ($urandom_range(0, 9) == 0) a = a | 32'h800;
      err  = a >= 32'h800;
      d    = $urandom;
      @(negedge clk);
      if (!wr) begin
        cb_mosi_i.ar_valid = 1; cb_mosi_i.ar_addr = a; cb_mosi_i.ar_size = size;
        #1;
        check("ar_ready when idle", cb_miso_o.ar_ready, 1'b1);
        @(negedge clk);
        cb_mosi_i.ar_valid = 0;
        cyc = 0;
        while (!cb_miso_o.r_valid && cyc < 50) begin
          check("no write response on a read", cb_miso_o.b_valid, 1'b0);
          @(negedge clk); cyc++;
        end
        repeat ($urandom_range(0, 2)) begin
          @(negedge clk);
          check("r_valid held", cb_miso_o.r_valid, 1'b1);
        end
        check("read resp", cb_miso_o.r_resp, err ? RESP_SLVERR : RESP_OKAY);
        if (!err) check("read data", cb_miso_o.r_data, model[a[9:2]]);
        cb_mosi_i.r_ready = 1;
        @(negedge clk);
        cb_mosi_i.r_ready = 0;
        n_rd++;
      end else begin
        cb_mosi_i.aw_valid = 1; cb_mosi_i.aw_addr = a; cb_mosi_i.aw_size = size;
        cb_mosi_i.w_valid = 1; cb_mosi_i.w_data = d; cb_mosi_i.w_strb = '1;
        #1;
        check("aw_ready when idle", cb_miso_o.aw_ready, 1'b1);
        check("w_ready when idle", cb_miso_o.w_ready, 1'b1);
        @(negedge clk);
        cb_mosi_i.aw_valid = 0; cb_mosi_i.w_valid = 0;
        check("busy: ar_ready low", cb_miso_o.ar_ready, 1'b0);
        cyc = 0;
        while (!cb_miso_o.b_valid && cyc < 50) begin @(negedge clk); cyc++; end
        check("write resp", cb_miso_o.b_resp, err ? RESP_SLVERR : RESP_OKAY);
        cb_mosi_i.b_ready = 1;
        @(negedge clk);
        cb_mosi_i.b_ready = 0;
        if (!err)
          for (int b = 0; b < 4; b++)
            if (b >= a[1:0] && b < a[1:0] + (1 << size)) model[a[9:2]][8*b +: 8] = d[8*b +: 8];
        check("memory after write", mem.mem[a[9:2]], model[a[9:2]]);
        n_wr++;
      end
      if (err) n_err++;
    end
    // latency: a read with no waits, from acceptance to the response handshake
    begin
      int lat;
      bit ok;
      ok = 0;
      for (int tries = 0; tries < 50 && !ok; tries++) begin
        @(negedge clk);
        cb_mosi_i.ar_valid = 1; cb_mosi_i.ar_addr = 32'h10; cb_mosi_i.ar_size = 3'd2;
        cb_mosi_i.r_ready = 1;
        @(negedge clk);
        cb_mosi_i.ar_valid = 0;
        lat = 1;
        ok = 1;
        while (!cb_miso_o.r_valid) begin
          if (ahb_mosi_o.htrans == HTRANS_NONSEQ && !ahb_miso_i.hready) ok = 0;
          if (mem.wcnt != 0) ok = 0;
          @(negedge clk); lat++;
        end
        @(negedge clk);
        cb_mosi_i.r_ready = 0;
      end
      check("zero-wait read latency", lat, 3);
    end
    checks++;
    if (n_rd == 0 || n_wr == 0 || n_err == 0 || n_wait == 0) begin
      failures++; $display("FAIL coverage rd=%0d wr=%0d err=%0d wait=%0d", n_rd, n_wr, n_err, n_wait);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
