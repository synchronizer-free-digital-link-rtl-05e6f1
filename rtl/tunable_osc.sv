// tunable_osc: BEHAVIOURAL MODEL (not synthesizable) of a two-speed tunable
// ring oscillator, as used for the sender and the receiver clock.
//
// The real part is a starved-inverter ring oscillator whose single mode bit
// selects a slow or a fast inverter delay; it is analog and process specific,
// so this model only reproduces its behaviour at the ports. With md = 0 the
// clock runs slow (nominal period SLOW_PERIOD_PS), with md = 1 fast
// (FAST_PERIOD_PS). A change of md takes effect TOSC_PS later (the
// oscillator response time). Drift is modelled by drawing each half period
// uniformly from [P/2, (P + JITTER_PS)/2], so the frequency in slow mode stays
// within [1/(SLOW+JITTER), 1/SLOW] and in fast mode within
// [1/(FAST+JITTER), 1/FAST]; choose FAST_PERIOD_PS + JITTER_PS <=
// SLOW_PERIOD_PS so that a slow clock is never faster than a fast one.
// While en is low the clock is held low; the first rising edge comes half a
// period after en rises. A metastable mode input, which the real oscillator
// turns into some frequency between the two modes, has no counterpart in
// two-state simulation.
//
// Defaults: 2.0 GHz slow and about 2.3 GHz fast, the published operating
// points. Response time and drift are this model's assumptions.
module tunable_osc #(
  parameter int unsigned SLOW_PERIOD_PS = 500,
  parameter int unsigned FAST_PERIOD_PS = 435,
  parameter int unsigned JITTER_PS      = 10,
  parameter int unsigned TOSC_PS        = 100
) (
  input  logic en,
  input  logic md,
  output logic clk
);
  timeunit 1ps; timeprecision 1ps;

  logic        md_eff;   // mode as seen by the ring, TOSC_PS late
  int unsigned half_ps;

  always @(md) md_eff <= #(TOSC_PS) md;

  initial md_eff = 1'b0;

  initial begin
    clk = 1'b0;
    forever begin
      wait (en);
      half_ps = ((md_eff ? FAST_PERIOD_PS : SLOW_PERIOD_PS)
                 + $urandom_range(JITTER_PS, 0)) / 2;
      #(half_ps) clk = 1'b1;
      half_ps = ((md_eff ? FAST_PERIOD_PS : SLOW_PERIOD_PS)
                 + $urandom_range(JITTER_PS, 0)) / 2;
      #(half_ps) clk = 1'b0;
    end
  end

endmodule
