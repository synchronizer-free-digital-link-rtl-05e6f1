// tb_buffer_cell: self-checking test of the two-domain full/empty flag cell.
//
// Two cells, one reset to 0 and one to 1, get a random sequence of sender
// and receiver clock pulses with random enables. A reference model keeps the
// cell's validity the plain way (a sender access makes it valid, a receiver
// access makes it invalid) and the flag is compared after every pulse. A
// watchdog ends the run if it hangs.
module tb_buffer_cell;
  timeunit 1ps; timeprecision 1ps;

  logic clk_snd = 1'b0, clk_rcv = 1'b0, rst_n = 1'b1;
  logic e_snd = 1'b0, e_rcv = 1'b0;
  logic flag0, flag1;
  logic ref0, ref1;
  int   checks = 0, failures = 0;

  buffer_cell #(.INIT(1'b0)) dut0 (.clk_snd, .clk_rcv, .rst_n, .e_snd, .e_rcv, .flag(flag0));
  buffer_cell #(.INIT(1'b1)) dut1 (.clk_snd, .clk_rcv, .rst_n, .e_snd, .e_rcv, .flag(flag1));

  task automatic check(string what);
    checks++;
    if (flag0 !== ref0 || flag1 !== ref1) begin
      failures++;
      $display("FAIL %s: flag0=%b (exp %b) flag1=%b (exp %b)", what, flag0, ref0, flag1, ref1);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref0 = 1'b0; ref1 = 1'b1;
    #1 rst_n = 1'b0; #9 check("in reset");
    rst_n = 1'b1;
    #10 check("after reset");
    for (int k = 0; k < 400; k++) begin
      bit side = 1'($urandom_range(1, 0));
      bit en   = ($urandom_range(3, 0) != 0);
      if (side == 1'b0) begin
        e_snd = en; #5 clk_snd = 1'b1; #5 clk_snd = 1'b0; e_snd = 1'b0;
        if (en) begin ref0 = 1'b1; ref1 = 1'b1; end
        #1 check("after sender pulse");
      end else begin
        e_rcv = en; #5 clk_rcv = 1'b1; #5 clk_rcv = 1'b0; e_rcv = 1'b0;
        if (en) begin ref0 = 1'b0; ref1 = 1'b0; end
        #1 check("after receiver pulse");
      end
    end
    // Repeated sender accesses keep the flag set; repeated receiver accesses keep it clear.
    repeat (2) begin e_snd = 1'b1; #5 clk_snd = 1'b1; #5 clk_snd = 1'b0; end
    e_snd = 1'b0; ref0 = 1'b1; ref1 = 1'b1; #1 check("double write");
    repeat (2) begin e_rcv = 1'b1; #5 clk_rcv = 1'b1; #5 clk_rcv = 1'b0; end
    e_rcv = 1'b0; ref0 = 1'b0; ref1 = 1'b0; #1 check("double read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
