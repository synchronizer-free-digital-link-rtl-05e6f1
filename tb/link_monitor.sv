// link_monitor: producer, consumer and checker for one sync_free_link
// instance, used by the workload testbench.
//
// While run is high it writes a running count as wr_data (one word per
// sender cycle) and checks every access and every word: the sender must find
// its cell empty (no overflow), the receiver its cell full (no underrun);
// words arrive in order, the first N/2 being the reset contents 0; each
// word's write-to-read latency is at most N slowest periods
// (N * (SLOW_PS + JIT_PS)). It counts reads, mode switches and fast cycles
// of both sides for the testbench to report and judge.
module link_monitor #(
  parameter int N       = 2,
  parameter int DW      = 8,
  parameter int SLOW_PS = 500,
  parameter int JIT_PS  = 10
) (
  input  logic          run,
  input  logic          clk_snd,
  input  logic          clk_rcv,
  input  logic          md_snd,
  input  logic          md_rcv,
  input  logic [N-1:0]  flags,
  input  logic [$clog2(N)-1:0] snd_addr,
  input  logic [$clog2(N)-1:0] rcv_addr,
  input  logic [DW-1:0] rd_data,
  output logic [DW-1:0] wr_data
);
  timeunit 1ps; timeprecision 1ps;

  longint checks = 0, failures = 0;
  longint wcount = 0, rcount = 0;
  longint n_rcv_fast = 0, n_snd_fast = 0;
  longint max_lat = 0;
  time    wtime [1024];
  time    rtime_read;

  initial wr_data = '0;

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("FAIL %m %0t: %s", $time, msg);
  endtask

  always @(posedge clk_snd) if (run) begin
    checks++;
    if (flags[snd_addr] !== 1'b0) fail("overflow");
    wtime[wcount % 1024] = $time;
    wcount++;
    wr_data <= DW'(wcount);
  end

  always @(posedge clk_rcv) if (run) begin
    checks++;
    if (flags[rcv_addr] !== 1'b1) fail("underrun");
    rtime_read = $time;
  end

  always @(negedge clk_rcv) if (run) begin
    logic [DW-1:0] exp;
    longint lat;
    checks++;
    exp = (rcount < N / 2) ? '0 : DW'(rcount - N / 2);
    if (rd_data !== exp) fail($sformatf("data: word %0d is %h, expected %h", rcount, rd_data, exp));
    if (rcount >= N / 2) begin
      lat = longint'(rtime_read - wtime[(rcount - N / 2) % 1024]);
      if (lat > max_lat) max_lat = lat;
      checks++;
      if (lat > N * (SLOW_PS + JIT_PS) || lat < 0) fail($sformatf("latency %0d ps", lat));
    end
    rcount++;
  end

  always @(posedge md_rcv) if (run) n_rcv_fast++;
  always @(posedge md_snd) if (run) n_snd_fast++;

endmodule
