// tb_lsu: tests the load and store unit in its default configuration
// (misaligned accesses and bus errors trap) and with both traps disabled,
// running one lsu_check for each, side by side.
module tb_lsu;
  int   checks [2], failures [2];
  logic done [2];

  lsu_check #(.TRAP_MISALIGNED(1'b1), .TRAP_BUS_ERROR(1'b1))
    u_traps (.checks (checks[0]), .failures (failures[0]), .done (done[0]));
  lsu_check #(.TRAP_MISALIGNED(1'b0), .TRAP_BUS_ERROR(1'b0))
    u_no_traps (.checks (checks[1]), .failures (failures[1]), .done (done[1]));

  initial begin
    #1;  // after the checkers have cleared done
    wait (done[0] && done[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1], failures[0] + failures[1]);
    $finish;
  end

  initial begin
    #1000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1], failures[0] + failures[1] + 1);
    $finish;
  end
endmodule
