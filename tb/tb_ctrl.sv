// tb_ctrl: self-checking test of the clocked threshold controller.
//
// Three controllers: N = 2 and N = 4 taking the receiver address as
// multiplexer select, and N = 2 with its own sample-address counter. Flags
// and receiver address are randomised before every rising edge; after it,
// md_rcv must equal the flag of the cell opposite the receiver's cell
// ((addr + N/2) mod N, or the own counter, which starts at N/2 and advances
// on falling edges), and md_snd its inverse. Both modes must be seen.
module tb_ctrl;
  timeunit 1ps; timeprecision 1ps;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [1:0] f2;  logic [0:0] a2;  logic mr2, ms2, mr2b, ms2b;
  logic [3:0] f4;  logic [1:0] a4;  logic mr4, ms4;
  logic e2, e4, e2b;
  int   checks = 0, failures = 0, fast_rcv = 0, fast_snd = 0;
  int   ffa;

  ctrl #(.N(2), .USE_RCV_ADDR(1'b1)) dut2  (.clk_rcv(clk), .rst_n, .flags(f2), .rcv_addr(a2), .md_rcv(mr2),  .md_snd(ms2));
  ctrl #(.N(4), .USE_RCV_ADDR(1'b1)) dut4  (.clk_rcv(clk), .rst_n, .flags(f4), .rcv_addr(a4), .md_rcv(mr4),  .md_snd(ms4));
  ctrl #(.N(2), .USE_RCV_ADDR(1'b0)) dut2b (.clk_rcv(clk), .rst_n, .flags(f2), .rcv_addr(a2), .md_rcv(mr2b), .md_snd(ms2b));

  task automatic check(string what);
    checks++;
    if (mr2 !== e2 || ms2 !== ~e2 || mr4 !== e4 || ms4 !== ~e4 || mr2b !== e2b || ms2b !== ~e2b) begin
      failures++;
      $display("FAIL %s: md_rcv2=%b/%b md_rcv4=%b/%b md_rcv2b=%b/%b md_snd=%b%b%b",
               what, mr2, e2, mr4, e4, mr2b, e2b, ms2, ms4, ms2b);
    end
    if (mr2) fast_rcv++; else fast_snd++;
  endtask

  initial begin
    #1_000_000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    f2 = '0; f4 = '0; a2 = '0; a4 = '0;
    e2 = 1'b0; e4 = 1'b0; e2b = 1'b0; ffa = 1;
    #1 rst_n = 1'b0; #9 check("reset");
    rst_n = 1'b1;
    for (int k = 0; k < 200; k++) begin
      f2 = 2'($urandom); f4 = 4'($urandom); a2 = 1'($urandom); a4 = 2'($urandom);
      e2  = f2[(int'(a2) + 1) % 2];
      e4  = f4[(int'(a4) + 2) % 4];
      e2b = f2[ffa];
      #10 clk = 1'b1; #1 check("after rising edge");
      // Flags moving after the edge must not reach the outputs.
      f2 = ~f2; f4 = ~f4; #1 check("flags change between edges");
      #10 clk = 1'b0; ffa = (ffa + 1) % 2;
      #1 check("after falling edge");
    end
    checks++;
    if (fast_rcv == 0 || fast_snd == 0) begin
      failures++; $display("FAIL: a mode never occurred (%0d/%0d)", fast_rcv, fast_snd);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
