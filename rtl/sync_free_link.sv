// sync_free_link: the complete synchronizer-free link between two clock
// domains, closed loop.
//
// Two tunable oscillators generate the sender clock clk_snd and the receiver
// clock clk_rcv; link_core moves one data word per clock cycle from the
// sender to the receiver through an N-cell ring buffer and drives the
// oscillators' mode bits (md_snd = not md_rcv), speeding up whichever side
// has fallen behind and slowing the other. The sender application supplies
// wr_data in the clk_snd domain (it is written at every rising edge of
// clk_snd); the receiver application takes rd_data in the clk_rcv domain (a
// new word after every rising edge of clk_rcv).
//
// Start-up: hold rst_n low with en_snd/en_rcv low, release rst_n, then raise
// both enables within less than one clock period of each other. Cells
// 0 .. N/2-1 start valid with data 0, so the first N/2 words read are 0 and
// the sender's words follow in order.
//
// The oscillator models are behavioural (timed) code, so this top is for
// simulation; link_core is the synthesizable part. The wiring follows the
// published N = 2 system; oscillator timing values are model assumptions.
// USE_RCV_ADDR is passed to the controller (see ctrl and link_core).
module sync_free_link
  import link_pkg::*;
#(
  parameter int unsigned N              = N_DEFAULT,
  parameter int unsigned DATA_W         = DATA_W_DEFAULT,
  parameter int unsigned SLOW_PERIOD_PS = 500,
  parameter int unsigned FAST_PERIOD_PS = 435,
  parameter int unsigned JITTER_PS      = 10,
  parameter int unsigned TOSC_PS        = 100,
  parameter bit          USE_RCV_ADDR   = 1'b1,
  localparam int unsigned AW            = addr_width(N)
) (
  input  logic              rst_n,
  input  logic              en_snd,
  input  logic              en_rcv,
  input  logic [DATA_W-1:0] wr_data,
  output logic [DATA_W-1:0] rd_data,
  output logic              clk_snd,
  output logic              clk_rcv,
  output logic              md_snd,
  output logic              md_rcv,
  output logic [N-1:0]      flags,
  output logic [AW-1:0]     snd_addr,
  output logic [AW-1:0]     rcv_addr
);
  timeunit 1ps; timeprecision 1ps;

  tunable_osc #(
    .SLOW_PERIOD_PS (SLOW_PERIOD_PS),
    .FAST_PERIOD_PS (FAST_PERIOD_PS),
    .JITTER_PS      (JITTER_PS),
    .TOSC_PS        (TOSC_PS)
  ) u_osc_snd (
    .en  (en_snd),
    .md  (md_snd),
    .clk (clk_snd)
  );

  tunable_osc #(
    .SLOW_PERIOD_PS (SLOW_PERIOD_PS),
    .FAST_PERIOD_PS (FAST_PERIOD_PS),
    .JITTER_PS      (JITTER_PS),
    .TOSC_PS        (TOSC_PS)
  ) u_osc_rcv (
    .en  (en_rcv),
    .md  (md_rcv),
    .clk (clk_rcv)
  );

  link_core #(.N(N), .DATA_W(DATA_W), .USE_RCV_ADDR(USE_RCV_ADDR)) u_core (
    .clk_snd    (clk_snd),
    .clk_rcv    (clk_rcv),
    .rst_n      (rst_n),
    .wr_data    (wr_data),
    .rd_data    (rd_data),
    .md_snd     (md_snd),
    .md_rcv     (md_rcv),
    .flags      (flags),
    .snd_addr_o (snd_addr),
    .rcv_addr_o (rcv_addr)
  );

endmodule
