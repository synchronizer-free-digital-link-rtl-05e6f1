// tb_sync_free_link: end-to-end test of the closed-loop link at its default
// parameters (N = 2, 8-bit words, 2.0 / 2.3 GHz oscillators).
//
// The test acts as producer and consumer. The producer writes a running
// count, one word per sender clock cycle; the consumer checks every word it
// reads: the first N/2 words are the reset contents (0), then the count in
// order with nothing lost, repeated or corrupted. It also checks, at every
// access, that the sender finds its cell empty (no overflow) and the
// receiver finds its cell full (no underrun); that every word's latency,
// from write to read, is at most N slowest clock periods; and that the
// receiver delivered at least one word per slowest clock period.
//
// The link is started several times with different start offsets between the
// two oscillators, including the 0, +30, +50 and -75 ps offsets of the
// published initialisation study, each run lasting RUN_CYCLES receiver
// cycles. Mechanisms that must happen at least once over all runs: the
// controller switching the receiver to fast (buffer more than half full),
// switching the sender to fast (less than half full), each oscillator
// actually running in fast mode, and the read pointer wrapping.
module tb_sync_free_link;
  timeunit 1ps; timeprecision 1ps;

  localparam int N = 2, DW = 8;
  localparam int SLOW = 500, JIT = 10;
  localparam int RUN_CYCLES = 20000;
  localparam int NRUNS = 6;
  localparam int OFFSETS [NRUNS] = '{0, 30, 50, -75, 200, -240};

  logic          rst_n = 1'b1, en_snd = 1'b0, en_rcv = 1'b0;
  logic [DW-1:0] wr_data, rd_data;
  logic          clk_snd, clk_rcv, md_snd, md_rcv;
  logic [N-1:0]  flags;
  logic [0:0]    snd_addr, rcv_addr;

  sync_free_link dut (.*);

  int  checks = 0, failures = 0;
  int  wcount, rcount;           // words written / read in this run
  time wtime [1024];             // write time per word (modulo 1024)
  time rtime_read;
  bit  running = 1'b0;
  int  n_rcv_fast = 0, n_snd_fast = 0, n_wrap = 0, n_rcv_fast_cycles = 0, n_snd_fast_cycles = 0;
  longint max_lat = 0;
  time t_start;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %0t: %s", $time, msg);
  endtask

  // Producer: a running count, one word per sender cycle.
  always @(posedge clk_snd) if (running) begin
    checks++;
    if (flags[snd_addr] !== 1'b0) fail($sformatf("overflow: sender hit full cell %0d", snd_addr));
    wtime[wcount % 1024] = $time;
    wcount++;
    wr_data <= DW'(wcount);
    if (md_snd) n_snd_fast_cycles++;
  end

  // Consumer side: every read must find a full cell.
  always @(posedge clk_rcv) if (running) begin
    checks++;
    if (flags[rcv_addr] !== 1'b1) fail($sformatf("underrun: receiver hit empty cell %0d", rcv_addr));
    if (rcv_addr == '0 && rcount > 0) n_wrap++;
    rtime_read = $time;
    if (md_rcv) n_rcv_fast_cycles++;
  end

  // The word read at a rising edge is in rd_data at the following falling edge.
  always @(negedge clk_rcv) if (running) begin
    logic [DW-1:0] exp;
    longint lat;
    checks++;
    exp = (rcount < N / 2) ? '0 : DW'(rcount - N / 2);
    if (rd_data !== exp) fail($sformatf("data: word %0d is %h, expected %h", rcount, rd_data, exp));
    if (rcount >= N / 2) begin
      lat = longint'(rtime_read - wtime[(rcount - N / 2) % 1024]);
      if (lat > max_lat) max_lat = lat;
      checks++;
      if (lat > N * (SLOW + JIT) || lat < 0) fail($sformatf("latency %0d ps of word %0d", lat, rcount));
    end
    rcount++;
  end

  always @(posedge md_rcv) if (running) n_rcv_fast++;
  always @(posedge md_snd) if (running) n_snd_fast++;

  initial begin
    #(64'd2_000_000_000); fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_data = DW'(0);
    for (int r = 0; r < NRUNS; r++) begin
      int off;
      off = OFFSETS[r];
      en_snd = 1'b0; en_rcv = 1'b0;
      #2000;
      rst_n = 1'b0; wcount = 0; rcount = 0; wr_data = DW'(0);
      #1000 rst_n = 1'b1;
      #1000;
      running = 1'b1; t_start = $time;
      // Positive offset: the sender starts earlier.
      if (off >= 0) begin en_snd = 1'b1; #(off); en_rcv = 1'b1; end
      else          begin en_rcv = 1'b1; #(-off); en_snd = 1'b1; end
      wait (rcount >= RUN_CYCLES);
      running = 1'b0;
      begin
        real ns;
        ns = real'($time - t_start) / 1000.0;
        checks++;
        if (rcount < int'(ns * 1000.0 / (SLOW + JIT)) - 2)
          fail($sformatf("throughput: %0d words in %.1f ns", rcount, ns));
        $display("run %0d offset %0d ps: %0d words in %.1f ns (%.3f GHz), max latency %0d ps",
                 r, off, rcount, ns, rcount / ns, max_lat);
      end
      @(posedge clk_rcv); @(posedge clk_snd);
    end
    $display("mechanisms: md_rcv rises %0d, md_snd rises %0d, rcv fast cycles %0d, snd fast cycles %0d, wraps %0d",
             n_rcv_fast, n_snd_fast, n_rcv_fast_cycles, n_snd_fast_cycles, n_wrap);
    checks += 5;
    if (n_rcv_fast == 0)        fail("receiver never switched to fast");
    if (n_snd_fast == 0)        fail("sender never switched to fast");
    if (n_rcv_fast_cycles == 0) fail("receiver never ran fast");
    if (n_snd_fast_cycles == 0) fail("sender never ran fast");
    if (n_wrap == 0)            fail("read pointer never wrapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
