// tb_snd_addr: self-checking test of the sender address logic.
//
// Checks, for N = 2 and N = 6, that the write pointer starts at N/2, moves
// only on the falling clock edge, wraps modulo N, and that the one-hot
// enables follow it. Expected values come from a counter kept in the test.
module tb_snd_addr;
  timeunit 1ps; timeprecision 1ps;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [0:0] addr2;  logic [1:0] e2;
  logic [2:0] addr6;  logic [5:0] e6;
  int   checks = 0, failures = 0;
  int   exp2, exp6;

  snd_addr #(.N(2)) dut2 (.clk_snd(clk), .rst_n, .addr(addr2), .e_snd(e2));
  snd_addr #(.N(6)) dut6 (.clk_snd(clk), .rst_n, .addr(addr6), .e_snd(e6));

  task automatic check(string what);
    checks++;
    if (int'(addr2) != exp2 || e2 != 2'(1 << exp2) || int'(addr6) != exp6 || e6 != 6'(1 << exp6)) begin
      failures++;
      $display("FAIL %s: addr2=%0d (exp %0d) e2=%b addr6=%0d (exp %0d) e6=%b",
               what, addr2, exp2, e2, addr6, exp6, e6);
    end
  endtask

  initial begin
    #1_000_000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    exp2 = 1; exp6 = 3;
    #1 rst_n = 1'b0; #9 check("reset");
    rst_n = 1'b1;
    for (int k = 0; k < 40; k++) begin
      #10 clk = 1'b1; #1 check("after rising edge (no change)");
      #10 clk = 1'b0; exp2 = (exp2 + 1) % 2; exp6 = (exp6 + 1) % 6;
      #1 check("after falling edge");
    end
    rst_n = 1'b0; exp2 = 1; exp6 = 3; #1 check("reset again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
