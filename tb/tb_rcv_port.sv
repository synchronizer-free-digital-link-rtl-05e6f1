// tb_rcv_port: self-checking test of the receiver port.
//
// For N = 2 and N = 4 the cell contents are randomised every cycle; the test
// checks that the read pointer starts at 0, moves only on the falling edge
// and wraps, that the one-hot enables follow it, and that each rising edge
// loads rd_data with the word of the cell the pointer named at that edge.
module tb_rcv_port;
  timeunit 1ps; timeprecision 1ps;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [1:0][7:0] cd2;  logic [0:0] a2; logic [1:0] e2; logic [7:0] d2;
  logic [3:0][7:0] cd4;  logic [1:0] a4; logic [3:0] e4; logic [7:0] d4;
  int   checks = 0, failures = 0;
  int   exp2, exp4;
  logic [7:0] expd2, expd4;

  rcv_port #(.N(2), .DATA_W(8)) dut2 (.clk_rcv(clk), .rst_n, .cell_data(cd2), .addr(a2), .e_rcv(e2), .rd_data(d2));
  rcv_port #(.N(4), .DATA_W(8)) dut4 (.clk_rcv(clk), .rst_n, .cell_data(cd4), .addr(a4), .e_rcv(e4), .rd_data(d4));

  task automatic check(string what);
    checks++;
    if (int'(a2) != exp2 || e2 != 2'(1 << exp2) || int'(a4) != exp4 || e4 != 4'(1 << exp4)
        || d2 != expd2 || d4 != expd4) begin
      failures++;
      $display("FAIL %s: a2=%0d/%0d a4=%0d/%0d d2=%h/%h d4=%h/%h", what,
               a2, exp2, a4, exp4, d2, expd2, d4, expd4);
    end
  endtask

  initial begin
    #1_000_000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    exp2 = 0; exp4 = 0; expd2 = '0; expd4 = '0;
    cd2 = '0; cd4 = '0;
    #1 rst_n = 1'b0; #9 check("reset");
    rst_n = 1'b1;
    for (int k = 0; k < 60; k++) begin
      for (int i = 0; i < 2; i++) cd2[i] = 8'($urandom);
      for (int i = 0; i < 4; i++) cd4[i] = 8'($urandom);
      expd2 = cd2[exp2]; expd4 = cd4[exp4];
      #10 clk = 1'b1; #1 check("after rising edge");
      #10 clk = 1'b0; exp2 = (exp2 + 1) % 2; exp4 = (exp4 + 1) % 4;
      #1 check("after falling edge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
