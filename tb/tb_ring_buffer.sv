// tb_ring_buffer: self-checking test of the ring buffer.
//
// For N = 2 and N = 4 the test plays writer and reader through the buffer
// with randomly interleaved sender and receiver clock pulses, keeping to the
// link's rules (the writer only writes the next empty cell, the reader only
// reads the next full one). A reference model of valid bits and contents,
// started in the published initial state (first half valid), is compared
// with flags and cell_data after every pulse.
module tb_ring_buffer;
  timeunit 1ps; timeprecision 1ps;

  logic clk_snd = 1'b0, clk_rcv = 1'b0, rst_n = 1'b1;
  logic [1:0] es2 = '0, er2 = '0;  logic [3:0] es4 = '0, er4 = '0;
  logic [7:0] wd;
  logic [1:0][7:0] cd2;  logic [1:0] fl2;
  logic [3:0][7:0] cd4;  logic [3:0] fl4;
  logic [7:0] m2 [2];  bit v2 [2];  int w2, r2;
  logic [7:0] m4 [4];  bit v4 [4];  int w4, r4;
  int checks = 0, failures = 0, writes = 0, reads = 0, full_seen = 0, empty_seen = 0;

  ring_buffer #(.N(2), .DATA_W(8)) dut2 (.clk_snd, .clk_rcv, .rst_n, .e_snd(es2), .e_rcv(er2),
                                         .wr_data(wd), .cell_data(cd2), .flags(fl2));
  ring_buffer #(.N(4), .DATA_W(8)) dut4 (.clk_snd, .clk_rcv, .rst_n, .e_snd(es4), .e_rcv(er4),
                                         .wr_data(wd), .cell_data(cd4), .flags(fl4));

  task automatic check(string what);
    bit bad = 1'b0;
    checks++;
    for (int i = 0; i < 2; i++)
      if (fl2[i] !== v2[i] || cd2[i] !== m2[i]) begin
        bad = 1'b1; $display("FAIL %s N=2 cell %0d: flag %b/%b data %h/%h", what, i, fl2[i], v2[i], cd2[i], m2[i]);
      end
    for (int i = 0; i < 4; i++)
      if (fl4[i] !== v4[i] || cd4[i] !== m4[i]) begin
        bad = 1'b1; $display("FAIL %s N=4 cell %0d: flag %b/%b data %h/%h", what, i, fl4[i], v4[i], cd4[i], m4[i]);
      end
    if (bad) failures++;
  endtask

  initial begin
    #10_000_000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 2; i++) begin m2[i] = '0; v2[i] = (i < 1); end
    for (int i = 0; i < 4; i++) begin m4[i] = '0; v4[i] = (i < 2); end
    w2 = 1; r2 = 0; w4 = 2; r4 = 0; wd = '0;
    #1 rst_n = 1'b0; #9 check("reset");
    rst_n = 1'b1;
    for (int k = 0; k < 1000; k++) begin
      if ($urandom_range(1, 0) == 0) begin
        // Sender cycle: write the next cell if it is empty.
        wd = 8'($urandom);
        es2 = v2[w2] ? '0 : 2'(1 << w2);
        es4 = v4[w4] ? '0 : 4'(1 << w4);
        #5 clk_snd = 1'b1; #5 clk_snd = 1'b0;
        if (!v2[w2]) begin v2[w2] = 1'b1; m2[w2] = wd; w2 = (w2 + 1) % 2; writes++; end
        if (!v4[w4]) begin v4[w4] = 1'b1; m4[w4] = wd; w4 = (w4 + 1) % 4; end
        es2 = '0; es4 = '0;
      end else begin
        // Receiver cycle: read the next cell if it is full.
        er2 = v2[r2] ? 2'(1 << r2) : '0;
        er4 = v4[r4] ? 4'(1 << r4) : '0;
        #5 clk_rcv = 1'b1; #5 clk_rcv = 1'b0;
        if (v2[r2]) begin v2[r2] = 1'b0; r2 = (r2 + 1) % 2; reads++; end
        if (v4[r4]) begin v4[r4] = 1'b0; r4 = (r4 + 1) % 4; end
        er2 = '0; er4 = '0;
      end
      #1 check("after access");
      if (v4[0] && v4[1] && v4[2] && v4[3]) full_seen++;
      if (!v4[0] && !v4[1] && !v4[2] && !v4[3]) empty_seen++;
    end
    checks++;
    if (writes < 100 || reads < 100 || full_seen == 0 || empty_seen == 0) begin
      failures++;
      $display("FAIL coverage: writes=%0d reads=%0d full=%0d empty=%0d", writes, reads, full_seen, empty_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
