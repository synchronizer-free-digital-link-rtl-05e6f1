// tb_tunable_osc: self-checking test of the tunable oscillator model.
//
// Checks that the clock stays low while disabled, that the first rising edge
// comes about half a period after enabling, that periods lie in the slow band
// for md = 0 and in the fast band for md = 1, and that a change of md shows
// in the period no earlier than the response time and within one period
// after it.
module tb_tunable_osc;
  timeunit 1ps; timeprecision 1ps;

  localparam int SLOW = 500, FAST = 435, JIT = 10, TOSC = 100;

  logic en = 1'b0, md = 1'b0, clk;
  int   checks = 0, failures = 0;
  time  last_rise, t_md, t_en;
  int   period;
  bit   have_last = 1'b0;
  int   n_slow = 0, n_fast = 0;

  tunable_osc #(.SLOW_PERIOD_PS(SLOW), .FAST_PERIOD_PS(FAST), .JITTER_PS(JIT), .TOSC_PS(TOSC))
    dut (.en, .md, .clk);

  task automatic expect_band(int p, int lo, int hi, string what);
    checks++;
    if (p < lo || p > hi) begin
      failures++; $display("FAIL %s: period %0d not in [%0d,%0d]", what, p, lo, hi);
    end
  endtask

  initial begin
    #50_000_000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Period measurement, classified by the mode that was stable long enough.
  always @(posedge clk) begin
    if (have_last) begin
      period = int'($time - last_rise);
      if (!md && $time - t_md > TOSC + SLOW + JIT) begin
        expect_band(period, SLOW - 1, SLOW + JIT, "slow mode"); n_slow++;
      end else if (md && $time - t_md > TOSC + SLOW + JIT) begin
        expect_band(period, FAST - 1, FAST + JIT, "fast mode"); n_fast++;
      end else begin
        expect_band(period, FAST - 1, SLOW + JIT, "switching");
      end
    end else begin
      checks++;
      if ($time - t_en < SLOW / 2 - 1 || $time - t_en > (SLOW + JIT) / 2) begin
        failures++; $display("FAIL first edge %0t after enable", $time - t_en);
      end
    end
    last_rise = $time; have_last = 1'b1;
  end

  initial begin
    t_md = 0;
    #5000;
    checks++;
    if (clk !== 1'b0) begin failures++; $display("FAIL clock runs while disabled"); end
    t_en = $time; en = 1'b1;
    repeat (8) begin
      #20_000;
      md = ~md; t_md = $time;
      // Just before TOSC the old mode must still be in effect.
      #(TOSC - 2);
      checks++;
      if (dut.md_eff === md) begin failures++; $display("FAIL mode took effect before TOSC"); end
      #4;
      checks++;
      if (dut.md_eff !== md) begin failures++; $display("FAIL mode not in effect after TOSC"); end
    end
    #20_000;
    checks++;
    if (n_slow < 100 || n_fast < 100) begin
      failures++; $display("FAIL too few periods measured: slow %0d fast %0d", n_slow, n_fast);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
