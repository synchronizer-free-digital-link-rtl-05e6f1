// tb_link_workloads: the link under the two operating points of the
// published evaluation, run side by side.
//
//  * Gate-level workload: oscillators at 2.0 GHz (slow) / 2.3 GHz (fast),
//    the default parameters, run for LONG_CYCLES receiver cycles
//    (10^7 cycles, about 5 ms of link time, as in the published gate-level runs).
//  * Transistor-level workload: oscillators at 2.09 GHz / 2.42 GHz
//    (periods 478 ps / 413 ps), at least 1100 receiver cycles (about 500 ns);
//    it simply keeps running as long as the first one.
//  * The same gate-level operating point with the controller variant that
//    keeps its own sample-address counter (USE_RCV_ADDR = 0).
//
// Both use N = 2. A link_monitor per instance produces and checks the data,
// the absence of overflow and underrun and the latency bound; this test adds
// the throughput bound (at least one word per slowest period) and requires
// that both controllers switched modes in both directions.
module tb_link_workloads;
  timeunit 1ps; timeprecision 1ps;

  localparam longint LONG_CYCLES = 10_000_000;

  logic rst_n = 1'b1, en = 1'b0, run = 1'b0;
  logic [7:0] wd_a, rd_a, wd_b, rd_b;
  logic cs_a, cr_a, ms_a, mr_a, cs_b, cr_b, ms_b, mr_b;
  logic [1:0] fl_a, fl_b;
  logic [0:0] sa_a, ra_a, sa_b, ra_b;
  logic [7:0] wd_c, rd_c;
  logic cs_c, cr_c, ms_c, mr_c;
  logic [1:0] fl_c;
  logic [0:0] sa_c, ra_c;
  longint checks, failures;
  time t0;

  sync_free_link dut_a (
    .rst_n, .en_snd(en), .en_rcv(en), .wr_data(wd_a), .rd_data(rd_a), .clk_snd(cs_a), .clk_rcv(cr_a),
    .md_snd(ms_a), .md_rcv(mr_a), .flags(fl_a), .snd_addr(sa_a), .rcv_addr(ra_a));
  link_monitor #(.SLOW_PS(500)) mon_a (
    .run, .clk_snd(cs_a), .clk_rcv(cr_a), .md_snd(ms_a), .md_rcv(mr_a), .flags(fl_a),
    .snd_addr(sa_a), .rcv_addr(ra_a), .rd_data(rd_a), .wr_data(wd_a));

  sync_free_link #(.SLOW_PERIOD_PS(478), .FAST_PERIOD_PS(413)) dut_b (
    .rst_n, .en_snd(en), .en_rcv(en), .wr_data(wd_b), .rd_data(rd_b), .clk_snd(cs_b), .clk_rcv(cr_b),
    .md_snd(ms_b), .md_rcv(mr_b), .flags(fl_b), .snd_addr(sa_b), .rcv_addr(ra_b));
  link_monitor #(.SLOW_PS(478)) mon_b (
    .run, .clk_snd(cs_b), .clk_rcv(cr_b), .md_snd(ms_b), .md_rcv(mr_b), .flags(fl_b),
    .snd_addr(sa_b), .rcv_addr(ra_b), .rd_data(rd_b), .wr_data(wd_b));

  sync_free_link #(.USE_RCV_ADDR(1'b0)) dut_c (
    .rst_n, .en_snd(en), .en_rcv(en), .wr_data(wd_c), .rd_data(rd_c), .clk_snd(cs_c), .clk_rcv(cr_c),
    .md_snd(ms_c), .md_rcv(mr_c), .flags(fl_c), .snd_addr(sa_c), .rcv_addr(ra_c));
  link_monitor #(.SLOW_PS(500)) mon_c (
    .run, .clk_snd(cs_c), .clk_rcv(cr_c), .md_snd(ms_c), .md_rcv(mr_c), .flags(fl_c),
    .snd_addr(sa_c), .rcv_addr(ra_c), .rd_data(rd_c), .wr_data(wd_c));

  task automatic finish_run();
    real ns;
    checks   = mon_a.checks + mon_b.checks + mon_c.checks + 8;
    failures = mon_a.failures + mon_b.failures + mon_c.failures;
    ns = real'($time - t0) / 1000.0;
    if (mon_a.rcount < longint'(ns * 1000.0 / 510.0) - 2) begin failures++; $display("FAIL throughput A"); end
    if (mon_b.rcount < longint'(ns * 1000.0 / 488.0) - 2) begin failures++; $display("FAIL throughput B"); end
    if (mon_a.n_rcv_fast == 0 || mon_a.n_snd_fast == 0) begin failures++; $display("FAIL A: mode switch missing"); end
    if (mon_b.n_rcv_fast == 0 || mon_b.n_snd_fast == 0) begin failures++; $display("FAIL B: mode switch missing"); end
    if (mon_c.rcount < longint'(ns * 1000.0 / 510.0) - 2) begin failures++; $display("FAIL throughput C"); end
    if (mon_c.n_rcv_fast == 0 || mon_c.n_snd_fast == 0) begin failures++; $display("FAIL C: mode switch missing"); end
    if (mon_b.rcount < 1100) begin failures++; $display("FAIL B: too short"); end
    if (mon_a.rcount < LONG_CYCLES) begin failures++; $display("FAIL A: too short"); end
    $display("A (2.0/2.3 GHz): %0d words in %.1f ns = %.3f GHz, max latency %0d ps, md_rcv rises %0d, md_snd rises %0d",
             mon_a.rcount, ns, mon_a.rcount / ns, mon_a.max_lat, mon_a.n_rcv_fast, mon_a.n_snd_fast);
    $display("B (2.09/2.42 GHz): %0d words in %.1f ns = %.3f GHz, max latency %0d ps, md_rcv rises %0d, md_snd rises %0d",
             mon_b.rcount, ns, mon_b.rcount / ns, mon_b.max_lat, mon_b.n_rcv_fast, mon_b.n_snd_fast);
    $display("C (2.0/2.3 GHz, own counter): %0d words in %.1f ns = %.3f GHz, max latency %0d ps, md_rcv rises %0d, md_snd rises %0d",
             mon_c.rcount, ns, mon_c.rcount / ns, mon_c.max_lat, mon_c.n_rcv_fast, mon_c.n_snd_fast);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    // Watchdog: far beyond 10^7 cycles at the slowest rate.
    #(64'd6_000_000_000);
    $display("FAIL watchdog");
    checks = mon_a.checks + mon_b.checks + mon_c.checks + 1;
    failures = mon_a.failures + mon_b.failures + mon_c.failures + 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 1'b0;
    #1000 rst_n = 1'b1;
    #1000 run = 1'b1; t0 = $time; en = 1'b1;
    wait (mon_a.rcount >= LONG_CYCLES);
    run = 1'b0;
    finish_run();
  end
endmodule
