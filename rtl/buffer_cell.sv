// buffer_cell: full/empty flag of one ring-buffer cell, set from the sender
// clock domain and cleared from the receiver clock domain.
//
// Two enable flip-flops, one per clock domain, hold the cell state; the flag
// is their XOR. When the sender accesses the cell (e_snd at a rising edge of
// clk_snd) its flip-flop copies the inverse of the receiver flip-flop, which
// makes the two differ and the flag 1 (cell valid / full). When the receiver
// accesses the cell (e_rcv at a rising edge of clk_rcv) its flip-flop copies
// the sender flip-flop, which makes them equal and the flag 0 (cell invalid /
// empty). Each flip-flop samples the other domain's flip-flop without a
// synchronizer; the link's control loop guarantees that the two domains never
// touch the same cell close together, so those samples are stable whenever
// the data path uses them. The flag itself may be read at any time by the
// controller and may then be caught in transition.
//
// The structure is the published two-flip-flop-and-XOR cell. The
// asynchronous active-low reset, which puts the flag at INIT (sender
// flip-flop INIT, receiver flip-flop 0), is this implementation's choice.
//
// Timing: flag changes right after the rising clock edge that performs an
// access; it is a combinational function of the two flip-flops.
module buffer_cell #(
  parameter bit INIT = 1'b0
) (
  input  logic clk_snd,
  input  logic clk_rcv,
  input  logic rst_n,
  input  logic e_snd,
  input  logic e_rcv,
  output logic flag
);
  timeunit 1ps; timeprecision 1ps;

  logic q_snd;  // sender-domain flip-flop
  logic q_rcv;  // receiver-domain flip-flop

  always_ff @(posedge clk_snd or negedge rst_n) begin
    if (!rst_n)     q_snd <= INIT;
    else if (e_snd) q_snd <= ~q_rcv;
  end

  always_ff @(posedge clk_rcv or negedge rst_n) begin
    if (!rst_n)     q_rcv <= 1'b0;
    else if (e_rcv) q_rcv <= q_snd;
  end

  assign flag = q_snd ^ q_rcv;

endmodule
