// tb_fifo_l0: random push/pop/flush traffic against a queue model; checks
// head data, occupancy, full and empty every cycle, and that a push into a
// full FIFO with a simultaneous pop is accepted.
module tb_fifo_l0;
  localparam int DEPTH = 2;
  localparam int WIDTH = 64;
  logic clk = 0, rst = 1, flush = 0, push = 0, pop = 0;
  logic [WIDTH-1:0] din, dout;
  logic empty, full;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [WIDTH-1:0] model [$];
  int checks = 0, failures = 0, n_full_pushpop = 0;

  always #5 clk = ~clk;

  fifo_l0 #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  task automatic check(input string what, input logic [WIDTH-1:0] got, input logic [WIDTH-1:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  initial begin
    din = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      check("count", count, model.size());
      check("empty", empty, model.size() == 0);
      check("full",  full,  model.size() == DEPTH);
      if (model.size() > 0) check("head", dout, model[0]);
      flush = ($urandom_range(0, 40) == 0);
      pop   = $urandom_range(0, 1);
      push  = $urandom_range(0, 1) && (model.size() < DEPTH || pop);
      din   = {$urandom, $urandom};
      @(posedge clk);
      if (push && pop && model.size() == DEPTH) n_full_pushpop++;
      if (flush) model.delete();
      else begin
        if (pop && model.size() > 0) void'(model.pop_front());
        if (push) model.push_back(din);
      end
    end
    checks++;
    if (n_full_pushpop == 0) begin failures++; $display("FAIL push+pop while full never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
