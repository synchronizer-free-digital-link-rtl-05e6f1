// ctrl: clocked threshold controller of the link (ClockedTh).
//
// The controller decides, once per receiver clock cycle, whether the buffer
// is more or less than half full, and sets the two oscillator modes from that
// single bit: md_rcv = 1 (receiver fast, sender slow) when it is more than
// half full, md_rcv = 0 (receiver slow, sender fast) otherwise. To find out,
// it samples the full/empty flag of the cell opposite the receiver's current
// cell, (addr + N/2) mod N, into flip-flop ffs on the rising edge of clk_rcv:
// if the sender is ahead of its nominal position it has already filled that
// cell (flag 1), if it is behind it has not (flag 0). md_snd is the inverse
// of md_rcv.
//
// The sampled flag comes from the other clock domain and may be changing at
// the sampling edge, so ffs may go metastable. That is intended: the mode
// bits only steer the oscillators, which stay within their slow/fast band
// for any input, and the data path never sees the controller's output. There
// is no synchronizer anywhere in the loop.
//
// The multiplexer select is the cell address, updated on the falling edge of
// clk_rcv so that it is settled half a cycle before ffs samples.
// USE_RCV_ADDR = 1 (the default, the optimised implementation) takes it from
// the receiver's read pointer rcv_addr; USE_RCV_ADDR = 0 builds the
// controller's own modulo-N address counter ffa, started at N/2, opposite the
// reader. Both variants and the inverted-clock select follow the design
// description; the reset of ffs to 0 is this implementation's choice.
//
// Timing: md_rcv/md_snd change right after a rising edge of clk_rcv, one
// flip-flop after the flag was sampled.
module ctrl
  import link_pkg::*;
#(
  parameter int unsigned N            = N_DEFAULT,
  parameter bit          USE_RCV_ADDR = 1'b1,
  localparam int unsigned AW          = addr_width(N)
) (
  input  logic          clk_rcv,
  input  logic          rst_n,
  input  logic [N-1:0]  flags,
  input  logic [AW-1:0] rcv_addr,
  output logic          md_rcv,
  output logic          md_snd
);
  timeunit 1ps; timeprecision 1ps;

  logic [AW-1:0] sel;   // index of the flag that ffs samples
  logic          ffs;   // sampled flag = md_rcv

  if (USE_RCV_ADDR) begin : g_rcv_addr
    // Opposite of the receiver's current cell.
    always_comb sel = AW'(opposite(32'(rcv_addr), N));
  end else begin : g_ffa
    // Own sample-address counter on the inverted receiver clock.
    logic [AW-1:0] ffa;
    always_ff @(negedge clk_rcv or negedge rst_n) begin
      if (!rst_n)                 ffa <= AW'(N / 2);
      else if (ffa == AW'(N - 1)) ffa <= '0;
      else                        ffa <= ffa + 1'b1;
    end
    assign sel = ffa;
  end

  always_ff @(posedge clk_rcv or negedge rst_n) begin
    if (!rst_n) ffs <= 1'b0;
    else        ffs <= flags[sel];
  end

  assign md_rcv = ffs;
  assign md_snd = ~ffs;

endmodule
