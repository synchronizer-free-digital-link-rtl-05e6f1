// snd_addr: sender address logic of the link.
//
// A modulo-N write pointer that advances on every falling edge of clk_snd
// and a decoder that turns it into one-hot cell enables e_snd. The sender
// writes one cell per clock cycle at the rising edge of clk_snd; because the
// pointer moves on the falling edge, the enables are stable half a cycle
// before each write. The pointer starts at N/2, half the ring ahead of the
// receiver pointer, which starts at 0. For N = 2 this is the single
// toggling flip-flop of the published implementation (Q-bar fed back to D,
// inverted clock, Q-bar enabling cell 0 and Q enabling cell 1). The
// asynchronous active-low reset is this implementation's choice.
module snd_addr
  import link_pkg::*;
#(
  parameter int unsigned N  = N_DEFAULT,
  localparam int unsigned AW = addr_width(N)
) (
  input  logic          clk_snd,
  input  logic          rst_n,
  output logic [AW-1:0] addr,
  output logic [N-1:0]  e_snd
);
  timeunit 1ps; timeprecision 1ps;

  always_ff @(negedge clk_snd or negedge rst_n) begin
    if (!rst_n)              addr <= AW'(N / 2);
    else if (addr == AW'(N - 1)) addr <= '0;
    else                     addr <= addr + 1'b1;
  end

  always_comb begin
    e_snd = '0;
    e_snd[addr] = 1'b1;
  end

endmodule
